// rr_arbiter: round-robin arbiter used for every scratchpad slice port in the NoC.
//
// Grants one of N requesters per cycle, combinationally, starting the search
// one past the requester granted last; the priority pointer moves only when a
// grant is given.  Output grant is one-hot (or zero when nobody requests).
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [N-1:0] grant
);
  localparam int W = (N > 1) ? $clog2(N) : 1;
  logic [W-1:0] last;

  logic found;
  always_comb begin
    grant = '0;
    found = 1'b0;
    for (int o = 1; o <= N; o++)
      if (!found && req[(int'(last) + o) % N]) begin
        grant[(int'(last) + o) % N] = 1'b1;
        found = 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last <= W'(N - 1);
    else
      for (int i = 0; i < N; i++)
        if (grant[i]) last <= W'(i);
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
