// outerspace_core: OuterSPACE-like outer-product SpGEMM core, CCF (A,B) = U_K C_M, U_K C_N.
//
// As in the paper's generated design, the K dimension is unrolled over the 16
// PEs (parallelism bound K): PE k holds row k of B in its B buffer, column k of
// A is streamed in, and each product A[m][k]*B[k][n] is added into the PE's
// accumulation buffer at the location given by the row id of A and the col id
// of B.  When every PE has finished its outer product, the 16 partial output
// matrices are merged (summed) while the result streams out.
//
// Local buffer: A_CRD/A_VAL[k*16+i], A_CNT[k] hold column k of A (row ids);
// B_CRD/B_VAL[k*16+j], B_CNT[k] hold row k of B (col ids).  Interface and
// output stream as in tpu_core.  Timing (this design's): the multiply phase
// takes max_k(A_CNT[k]*B_CNT[k]) cycles plus one, then the 256 merged words
// stream out at one per cycle.
module outerspace_core
  import aespa_pkg::*;
(
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
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  data_t a_val [REG_WORDS];
  crd_t  a_crd [REG_WORDS];
  cnt_t  a_cnt [TILE];
  data_t b_val [REG_WORDS];
  crd_t  b_crd [REG_WORDS];
  cnt_t  b_cnt [TILE];

  idx_t  oidx;
  cnt_t  a_ptr [NPE];
  cnt_t  b_ptr [NPE];
  logic  fin   [NPE];
  data_t part  [NPE];
  data_t merged;
  logic  all_fin;

  always_ff @(posedge clk) begin
    if (lb_wr.en) begin
      unique case (lb_wr.region)
        LB_A_VAL: a_val[lb_wr.idx] <= lb_wr.data;
        LB_A_CRD: a_crd[lb_wr.idx] <= crd_t'(lb_wr.data);
        LB_A_CNT: a_cnt[lb_wr.idx[CRD_W-1:0]] <= cnt_t'(lb_wr.data);
        LB_B_VAL: b_val[lb_wr.idx] <= lb_wr.data;
        LB_B_CRD: b_crd[lb_wr.idx] <= crd_t'(lb_wr.data);
        LB_B_CNT: b_cnt[lb_wr.idx[CRD_W-1:0]] <= cnt_t'(lb_wr.data);
        default: ;
      endcase
    end
  end

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    outerspace_pe u_pe (
      .clk, .rst_n,
      .clear (start),
      .en    (state == S_RUN),
      .a_cnt (a_cnt[k]),
      .b_cnt (b_cnt[k]),
      .a_ptr (a_ptr[k]),
      .b_ptr (b_ptr[k]),
      .a_crd (a_crd[k * TILE + int'(a_ptr[k][CRD_W-1:0])]),
      .a_val (a_val[k * TILE + int'(a_ptr[k][CRD_W-1:0])]),
      .b_crd (b_crd[k * TILE + int'(b_ptr[k][CRD_W-1:0])]),
      .b_val (b_val[k * TILE + int'(b_ptr[k][CRD_W-1:0])]),
      .fin   (fin[k]),
      .rd_idx(oidx),
      .rd_data(part[k])
    );
  end

  // Merge of the per-PE partial output matrices.
  always_comb begin
    all_fin = 1'b1;
    merged  = '0;
    for (int k = 0; k < NPE; k++) begin
      all_fin &= fin[k];
      merged  += part[k];
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      oidx  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) state <= S_RUN;
        S_RUN: if (all_fin) begin
          state <= S_DRAIN;
          oidx  <= '0;
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
  assign out_word  = '{idx: oidx, data: merged};

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
