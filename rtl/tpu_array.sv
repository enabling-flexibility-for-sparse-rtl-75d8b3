// tpu_array: ROWS x COLS grid of tpu_pe in an output-stationary systolic array.
//
// Row i receives a_feed[i] at its left edge, column j receives b_feed[j] at its
// top edge; values move one PE per cycle.  With skewed feeds (row i delayed by
// i cycles, column j by j cycles) PE(i,j) sees A[i][k] and B[k][j] together in
// cycle k+i+j, so after K+ROWS+COLS-2 cycles every PE holds one finished
// output of the ROWS x COLS block.
module tpu_array
  import aespa_pkg::*; #(
  parameter int ROWS = 4,
  parameter int COLS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clear,
  input  data_t a_feed [ROWS],
  input  data_t b_feed [COLS],
  output data_t acc    [ROWS][COLS]
);
  data_t a_h [ROWS][COLS+1];
  data_t b_v [ROWS+1][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    assign a_h[i][0] = a_feed[i];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_col
    assign b_v[0][j] = b_feed[j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_r
    for (genvar j = 0; j < COLS; j++) begin : g_c
      tpu_pe u_pe (
        .clk, .rst_n, .en, .clear,
        .a_in (a_h[i][j]),   .b_in (b_v[i][j]),
        .a_out(a_h[i][j+1]), .b_out(b_v[i+1][j]),
        .acc  (acc[i][j])
      );
    end
  end
endmodule
