// sync_fifo: single-clock FIFO, used as the EIE-like PEs' MAC queues and as the
// kernel task queue.
//
// Circular buffer of DEPTH entries of type T with valid/ready on both sides.
// A push and a pop may happen in the same cycle.  Data at the head is visible
// combinationally (first-word fall-through).  Reset empties it.
module sync_fifo #(
  parameter type T         = logic [31:0],
  parameter int  DEPTH     = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     push_data,
  output logic full,
  input  logic pop,
  output T     head,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign head  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push && !full) begin
        mem[wr_ptr] <= push_data;
        wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop && !empty)
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(push && !full)) - (($clog2(DEPTH+1))'(pop && !empty));
    end
  end

  property p_no_overflow;  @(posedge clk) disable iff (!rst_n) !(push && full && !pop); endproperty
  property p_no_underflow; @(posedge clk) disable iff (!rst_n) !(pop && empty); endproperty
  a_no_overflow:  assert property (p_no_overflow);
  a_no_underflow: assert property (p_no_underflow);
endmodule
