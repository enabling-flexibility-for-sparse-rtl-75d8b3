// outerspace_pe: one PE of the OuterSPACE-like outer-product sub-accelerator.
//
// The PE is assigned one K index.  Its B buffer (in the core) holds row k of B
// (col_ids + values); column k of A (row_ids + values) is streamed past it.
// Each cycle it forms one product A[m][k]*B[k][n] of the outer product and
// adds it into its own 16x16 accumulation buffer at (row_id, col_id), walking
// the B row fastest.  `clear` zeroes the accumulation buffer and restarts.
// The buffer is read combinationally through rd_idx for the final merge.
module outerspace_pe
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
  input  idx_t  rd_idx,
  output data_t rd_data
);
  data_t accbuf [REG_WORDS];

  assign fin     = (a_ptr >= a_cnt) || (b_cnt == '0);
  assign rd_data = accbuf[rd_idx];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      a_ptr <= '0;
      b_ptr <= '0;
    end else if (en && !fin) begin
      if (b_ptr + 1'b1 >= b_cnt) begin
        b_ptr <= '0;
        a_ptr <= a_ptr + 1'b1;
      end else begin
        b_ptr <= b_ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int i = 0; i < REG_WORDS; i++) accbuf[i] <= '0;
    end else if (en && !fin) begin
      accbuf[{a_crd, b_crd}] <= accbuf[{a_crd, b_crd}] + data_t'(a_val * b_val);
    end
  end
endmodule
