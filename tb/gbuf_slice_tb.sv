// gbuf_slice_tb: self-checking testbench for one global-scratchpad slice.
//
// Runs a reduced bank size (1024 words) so that both banks can be filled
// completely, then issues random fill writes, compute-bank reads, plain and
// accumulating output writes, host reads of either bank and bank swaps, all
// at once, and compares every read (one cycle later) with a model of the two
// banks.  Checks that fills never reach the compute bank and that output
// writes never reach the fill bank.
module gbuf_slice_tb;
  import aespa_pkg::*;

  localparam int W = 1024;
  logic  clk = 1'b0, rst_n = 1'b0;
  logic  swap, sel, fill_we, rd_en, wr_en, wr_accum, host_rd_en, host_rd_bank;
  addr_t fill_addr, rd_addr, wr_addr, host_rd_addr;
  data_t fill_data, rd_data, wr_data, host_rd_data;
  data_t model [2][W];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  gbuf_slice #(.BANK_WORDS(W)) dut (.*);

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

  task automatic idle_ports();
    swap <= 0; fill_we <= 0; rd_en <= 0; wr_en <= 0; wr_accum <= 0; host_rd_en <= 0;
  endtask

  initial begin
    logic  exp_rd_v, exp_h_v;
    data_t exp_rd, exp_h;
    idle_ports();
    host_rd_bank = 0; fill_addr = '0; rd_addr = '0; wr_addr = '0; host_rd_addr = '0;
    fill_data = '0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(sel == 1'b0, "compute bank is bank 0 after reset");
    // Fill both banks through the fill port (bank 1 first, then swap, bank 0).
    for (int b = 1; b >= 0; b--) begin
      for (int a = 0; a < W; a++) begin
        @(posedge clk);
        fill_we <= 1; fill_addr <= addr_t'(a); fill_data <= data_t'($urandom);
        #1 model[b][a] = fill_data;
      end
      @(posedge clk);
      fill_we <= 0; swap <= 1;
      @(posedge clk);
      swap <= 0;
    end
    // sel has toggled twice: back to 0.  Random traffic.
    exp_rd_v = 0; exp_h_v = 0;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      logic cur;
      @(posedge clk);
      #1;
      // Check last cycle's reads.
      if (exp_rd_v) check(rd_data == exp_rd, $sformatf("rd_data %0d expected %0d", rd_data, exp_rd));
      if (exp_h_v)  check(host_rd_data == exp_h, $sformatf("host_rd_data %0d expected %0d", host_rd_data, exp_h));
      cur = sel;
      idle_ports();
      exp_rd_v = 0; exp_h_v = 0;
      if ($urandom_range(99) < 2) begin
        swap <= 1;
      end else begin
        int fa, ra, wa, ha;
        logic hb;
        fa = int'($urandom_range(W - 1));
        ra = int'($urandom_range(W - 1));
        wa = int'($urandom_range(W - 1));
        ha = int'($urandom_range(W - 1));
        hb = 1'($urandom_range(1));
        if ($urandom_range(1)) begin
          rd_en <= 1; rd_addr <= addr_t'(ra);
          exp_rd_v = 1; exp_rd = model[cur][ra];
        end
        if ($urandom_range(1)) begin
          host_rd_en <= 1; host_rd_addr <= addr_t'(ha); host_rd_bank <= hb;
          exp_h_v = 1; exp_h = model[hb][ha];
        end
        if ($urandom_range(1)) begin
          data_t d;
          d = data_t'($urandom);
          fill_we <= 1; fill_addr <= addr_t'(fa); fill_data <= d;
          model[!cur][fa] = d;
        end
        if ($urandom_range(1)) begin
          data_t d;
          logic acc;
          d = data_t'($urandom);
          acc = 1'($urandom_range(1));
          wr_en <= 1; wr_addr <= addr_t'(wa); wr_data <= d; wr_accum <= acc;
          model[cur][wa] = acc ? model[cur][wa] + d : d;
        end
      end
      // a swap takes effect at this edge: the model follows sel next cycle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
