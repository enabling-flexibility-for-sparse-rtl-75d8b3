// noc_xbar_tb: self-checking testbench for the crossbar NoC.
//
// Four requesters send random requests to four targets and hold each request
// until it is granted, as the clusters do.  Each target answers a granted
// request one cycle later with a value derived from it.  Checked every cycle:
// grants only go to valid requesters, each target grants at most one and at
// least one when asked (no idle target with waiting requests), the target
// sees the granted payload, the answer returns to the right requester, and no
// requester waits longer than N_REQ-1 cycles while contending (round robin).
module noc_xbar_tb;
  import aespa_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req_valid, req_grant, tgt_valid, rsp_valid;
  logic [1:0]   req_tgt [N];
  addr_t        req_data [N];
  addr_t        tgt_data [N];
  data_t        tgt_rsp [N];
  data_t        rsp_data [N];
  int checks = 0, failures = 0;
  int wait_cnt [N];
  int contention = 0;

  always #5 clk = ~clk;

  noc_xbar #(.N_REQ(N), .N_TGT(N), .REQ_T(addr_t), .RSP_T(data_t)) dut (.*);

  // Targets: answer = payload + 1000*target, one cycle after the grant.
  always_ff @(posedge clk)
    for (int t = 0; t < N; t++)
      if (tgt_valid[t]) tgt_rsp[t] <= data_t'(tgt_data[t]) + data_t'(1000 * t);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [N-1:0] exp_rsp_v, granted;
    data_t        exp_rsp [N];
    req_valid = '0;
    for (int r = 0; r < N; r++) begin
      req_tgt[r] = '0; req_data[r] = '0; wait_cnt[r] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    exp_rsp_v = '0;
    granted = '0;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(posedge clk);
      #1;
      // responses to last cycle's grants
      for (int r = 0; r < N; r++) begin
        check(rsp_valid[r] == exp_rsp_v[r], $sformatf("rsp_valid[%0d]", r));
        if (exp_rsp_v[r]) check(rsp_data[r] == exp_rsp[r], $sformatf("rsp_data[%0d]=%0d expected %0d", r, rsp_data[r], exp_rsp[r]));
      end
      exp_rsp_v = '0;
      // new requests for requesters that were granted or idle
      for (int r = 0; r < N; r++)
        if (!req_valid[r] || granted[r]) begin
          req_valid[r] = ($urandom_range(99) < 70);
          req_tgt[r]   = (cyc % 3000 < 500) ? 2'd1 : 2'($urandom_range(N - 1));
          req_data[r]  = addr_t'($urandom_range(100000));
        end
      #1;
      for (int t = 0; t < N; t++) begin
        int asked, granted;
        asked = 0; granted = 0;
        for (int r = 0; r < N; r++) begin
          if (req_valid[r] && req_tgt[r] == 2'(t)) asked++;
          if (req_grant[r] && req_tgt[r] == 2'(t)) begin
            granted++;
            check(tgt_data[t] == req_data[r], $sformatf("target %0d payload", t));
            exp_rsp_v[r] = 1'b1;
            exp_rsp[r]   = data_t'(req_data[r]) + data_t'(1000 * t);
          end
        end
        if (asked > 1) contention++;
        check(tgt_valid[t] == (asked > 0), $sformatf("target %0d valid", t));
        check(granted == ((asked > 0) ? 1 : 0), $sformatf("target %0d granted %0d of %0d", t, granted, asked));
      end
      for (int r = 0; r < N; r++) begin
        check(!req_grant[r] || req_valid[r], $sformatf("grant without request %0d", r));
        if (req_valid[r] && !req_grant[r]) wait_cnt[r]++;
        else wait_cnt[r] = 0;
        check(wait_cnt[r] < N, $sformatf("requester %0d starved for %0d cycles", r, wait_cnt[r]));
      end
      granted = req_grant;
    end
    check(contention > 1000, $sformatf("contention cycles %0d", contention));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
