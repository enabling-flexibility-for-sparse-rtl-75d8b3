// tpu_core: TPU-like dense sub-accelerator core, CCF (A,B) = U_M U_K, U_K U_N.
//
// The paper's GEMM building block: an output-stationary systolic array whose
// PEs keep their partial sums locally and pass operands right and down; when a
// block is finished the sums move to the output buffer.  Here 16 PEs form a
// 4x4 array (the paper gives 16 PEs per core, not their arrangement) that
// walks the 16x16 output tile in 16 blocks of 4x4.
//
// Interface: the local buffer is written through lb_wr (regions A_VAL holding
// A[m][k] at m*16+k and B_VAL holding B[k][n] at k*16+n; other regions are
// ignored).  A `start` pulse computes O = A x B into the output buffer, then
// the 256 words O[m][n] stream out in index order over out_valid/out_ready;
// `done` pulses when the last word is accepted.
//
// Timing: each 4x4 block takes K+ROWS+COLS-2 = 22 feed cycles (the last
// product reaches PE(3,3) in cycle K-1+3+3) plus one cycle to move the sums
// out and clear the PEs; the first output word appears 16*23+2 = 370 cycles
// after the start pulse.  The array has an initiation interval of one (a new
// MAC every cycle in every PE), as the paper reports for its TPU-like core.
module tpu_core
  import aespa_pkg::*; #(
  parameter int ROWS = 4,
  parameter int COLS = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  lb_wr_t    lb_wr,
  input  logic      start,
  output logic      busy,
  output logic      done,
  output logic      out_valid,
  input  logic      out_ready,
  output out_word_t out_word
);
  localparam int BM = TILE / ROWS;
  localparam int BN = TILE / COLS;
  localparam int T_LAST = TILE + ROWS + COLS - 3;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_SAVE, S_DRAIN} state_e;
  state_e state;

  data_t a_val [REG_WORDS];
  data_t b_val [REG_WORDS];
  data_t o_buf [REG_WORDS];

  logic [$clog2(BM)-1:0] bm;
  logic [$clog2(BN)-1:0] bn;
  logic [5:0] t;
  idx_t oidx;

  data_t a_feed [ROWS];
  data_t b_feed [COLS];
  data_t acc    [ROWS][COLS];

  // Skewed, zero-padded feeds from the local buffer.
  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      int k;
      k = int'(t) - i;
      a_feed[i] = (state == S_RUN && k >= 0 && k < TILE)
                  ? a_val[(int'(bm) * ROWS + i) * TILE + k] : '0;
    end
    for (int j = 0; j < COLS; j++) begin
      int k;
      k = int'(t) - j;
      b_feed[j] = (state == S_RUN && k >= 0 && k < TILE)
                  ? b_val[k * TILE + int'(bn) * COLS + j] : '0;
    end
  end

  tpu_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .en   (state == S_RUN),
    .clear(state == S_SAVE || start),
    .a_feed, .b_feed, .acc
  );

  always_ff @(posedge clk) begin
    if (lb_wr.en) begin
      if (lb_wr.region == LB_A_VAL) a_val[lb_wr.idx] <= lb_wr.data;
      if (lb_wr.region == LB_B_VAL) b_val[lb_wr.idx] <= lb_wr.data;
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      bm <= '0; bn <= '0; t <= '0; oidx <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          bm <= '0; bn <= '0; t <= '0;
        end
        S_RUN: begin
          t <= t + 1'b1;
          if (int'(t) == T_LAST) state <= S_SAVE;
        end
        S_SAVE: begin
          for (int i = 0; i < ROWS; i++)
            for (int j = 0; j < COLS; j++)
              o_buf[(int'(bm) * ROWS + i) * TILE + int'(bn) * COLS + j] <= acc[i][j];
          t <= '0;
          if (int'(bn) == BN - 1) begin
            bn <= '0;
            bm <= bm + 1'b1;
            if (int'(bm) == BM - 1) begin
              state <= S_DRAIN;
              oidx  <= '0;
            end else state <= S_RUN;
          end else begin
            bn <= bn + 1'b1;
            state <= S_RUN;
          end
        end
        S_DRAIN: if (out_ready) begin
          oidx <= oidx + 1'b1;
          if (oidx == idx_t'(REG_WORDS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_DRAIN);
  assign out_word  = '{idx: oidx, data: o_buf[oidx]};

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
