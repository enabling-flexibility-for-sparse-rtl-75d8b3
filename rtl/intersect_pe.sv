// intersect_pe: one PE of the ExTensor-like inner-product sub-accelerator,
// with its own coordinate intersection unit.
//
// It intersects the coordinate list of the current row of A (col_ids) with
// that of the PE's column of B (row_ids) by a two-pointer merge, one step per
// cycle: equal coordinates give an effectual product (both values are fetched
// through the pointers and multiplied into acc) and advance both pointers,
// otherwise the pointer with the smaller coordinate advances.  `fin` is high
// when either list is exhausted.  `clear` restarts for a new row.
module intersect_pe
  import aespa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  en,
  input  cnt_t  a_cnt,
  input  cnt_t  b_cnt,
  output cnt_t  a_ptr,
  output cnt_t  b_ptr,
  input  crd_t  a_crd,
  input  data_t a_val,
  input  crd_t  b_crd,
  input  data_t b_val,
  output logic  fin,
  output data_t acc
);
  assign fin = (a_ptr >= a_cnt) || (b_ptr >= b_cnt);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      a_ptr <= '0;
      b_ptr <= '0;
      acc   <= '0;
    end else if (en && !fin) begin
      if (a_crd == b_crd) begin
        acc   <= acc + data_t'(a_val * b_val);
        a_ptr <= a_ptr + 1'b1;
        b_ptr <= b_ptr + 1'b1;
      end else if (a_crd < b_crd) begin
        a_ptr <= a_ptr + 1'b1;
      end else begin
        b_ptr <= b_ptr + 1'b1;
      end
    end
  end
endmodule
