// noc_xbar: the flexible NoC between scratchpad slices and sub-accelerator clusters.
//
// The paper connects the global buffer to all PEs through a highly flexible
// NoC without giving its structure; this is the simplest network with that
// property, a full crossbar.  Each of N_REQ requesters presents a request
// (payload REQ_T) for one of N_TGT targets; a round-robin arbiter per target
// grants one requester per cycle (req_grant), the granted payload appears at
// the target (tgt_valid/tgt_data) in the same cycle, and whatever the target
// answers one cycle later (tgt_rsp) is returned to the requester granted in
// the previous cycle (rsp_valid/rsp_data).  A requester that is not granted
// keeps its request and waits: this is where kernels running in parallel
// contend for a slice.
module noc_xbar
  import aespa_pkg::*;
#(
  parameter int  N_REQ = N_CL,
  parameter int  N_TGT = N_CL,
  parameter type REQ_T = addr_t,
  parameter type RSP_T = data_t
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_REQ-1:0] req_valid,
  input  logic [$clog2(N_TGT)-1:0] req_tgt [N_REQ],
  input  REQ_T req_data [N_REQ],
  output logic [N_REQ-1:0] req_grant,
  output logic [N_TGT-1:0] tgt_valid,
  output REQ_T tgt_data [N_TGT],
  input  RSP_T tgt_rsp  [N_TGT],
  output logic [N_REQ-1:0] rsp_valid,
  output RSP_T rsp_data [N_REQ]
);
  localparam int RW = (N_REQ > 1) ? $clog2(N_REQ) : 1;

  logic [N_REQ-1:0] req_for  [N_TGT];
  logic [N_REQ-1:0] gnt      [N_TGT];
  logic [N_TGT-1:0] last_v;
  logic [RW-1:0]    last_req [N_TGT];

  for (genvar t = 0; t < N_TGT; t++) begin : g_tgt
    always_comb
      for (int r = 0; r < N_REQ; r++)
        req_for[t][r] = req_valid[r] && (int'(req_tgt[r]) == t);
    rr_arbiter #(.N(N_REQ)) u_arb (.clk, .rst_n, .req(req_for[t]), .grant(gnt[t]));
  end

  always_comb begin
    req_grant = '0;
    for (int t = 0; t < N_TGT; t++) begin
      tgt_valid[t] = |gnt[t];
      tgt_data[t]  = req_data[0];
      for (int r = 0; r < N_REQ; r++)
        if (gnt[t][r]) begin
          tgt_data[t]  = req_data[r];
          req_grant[r] = 1'b1;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last_v <= '0;
    else        last_v <= tgt_valid;
    for (int t = 0; t < N_TGT; t++)
      for (int r = 0; r < N_REQ; r++)
        if (gnt[t][r]) last_req[t] <= RW'(r);
  end

  always_comb begin
    rsp_valid = '0;
    for (int r = 0; r < N_REQ; r++) rsp_data[r] = tgt_rsp[0];
    for (int t = 0; t < N_TGT; t++)
      if (last_v[t]) begin
        rsp_valid[last_req[t]] = 1'b1;
        rsp_data[last_req[t]]  = tgt_rsp[t];
      end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) (req_grant & ~req_valid) == '0);
endmodule
