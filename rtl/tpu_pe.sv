// tpu_pe: one processing element of the output-stationary systolic array.
//
// Each cycle it multiplies the A value arriving from the left with the B value
// arriving from the top, adds the product to its local partial sum, and
// forwards both values (registered) to the right and bottom neighbours, as in
// the paper's TPU-like sub-accelerator.  `clear` zeroes the partial sum and the
// forwarding registers (start of an output block); `en` lets it compute.
// int32 arithmetic wraps modulo 2^32.
module tpu_pe
  import aespa_pkg::*; (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clear,
  input  data_t a_in,
  input  data_t b_in,
  output data_t a_out,
  output data_t b_out,
  output data_t acc
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (en) begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= acc + data_t'(a_in * b_in);
    end
  end
endmodule
