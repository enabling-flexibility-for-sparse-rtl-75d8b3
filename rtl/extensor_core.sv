// extensor_core: ExTensor-like inner-product SpGEMM core, CCF (A,B) = U_M C_K, U_N C_K.
//
// Following the paper, each row of A is compared with every column of B: the
// col_ids of the row and the row_ids of a column go through an intersection
// unit that finds matching K coordinates, the values at those coordinates are
// fetched from both matrices and multiplied by the PE that owns that output
// column.  The 16 PEs cover the 16 columns of B (parallelism bound N).  The
// paper uses an intersection unit and a NoC that distributes values to the
// PEs; here every PE has its own intersection unit reading the shared row
// buffer of A, which delivers the same matches without a separate NoC.
//
// Local buffer: A_CRD/A_VAL[m*16+i] and A_CNT[m] hold row m of A, B_CRD/B_VAL
// [n*16+i] and B_CNT[n] column n of B.  Interface and output stream as in
// tpu_core.  Timing (this design's): a row takes as many cycles as the longest
// merge among the 16 PEs (at most A_CNT[m]+B_CNT[n]-1 steps) plus one cycle to
// store the row of outputs.
module extensor_core
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
  data_t o_buf [REG_WORDS];

  crd_t  m;
  idx_t  oidx;
  cnt_t  a_ptr [NPE];
  cnt_t  b_ptr [NPE];
  logic  fin   [NPE];
  data_t acc   [NPE];
  logic  all_fin, row_clear;

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

  always_comb begin
    all_fin = 1'b1;
    for (int n = 0; n < NPE; n++) all_fin &= fin[n];
  end
  assign row_clear = (state == S_RUN) && all_fin;

  for (genvar n = 0; n < NPE; n++) begin : g_pe
    intersect_pe u_pe (
      .clk, .rst_n,
      .clear(row_clear || start),
      .en   (state == S_RUN),
      .a_cnt(a_cnt[m]),
      .b_cnt(b_cnt[n]),
      .a_ptr(a_ptr[n]),
      .b_ptr(b_ptr[n]),
      .a_crd(a_crd[{m, a_ptr[n][CRD_W-1:0]}]),
      .a_val(a_val[{m, a_ptr[n][CRD_W-1:0]}]),
      .b_crd(b_crd[n * TILE + int'(b_ptr[n][CRD_W-1:0])]),
      .b_val(b_val[n * TILE + int'(b_ptr[n][CRD_W-1:0])]),
      .fin  (fin[n]),
      .acc  (acc[n])
    );
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      m     <= '0;
      oidx  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          m     <= '0;
        end
        S_RUN: if (all_fin) begin
          for (int n = 0; n < NPE; n++) o_buf[{m, crd_t'(n)}] <= acc[n];
          m <= m + 1'b1;
          if (m == crd_t'(TILE - 1)) begin
            state <= S_DRAIN;
            oidx  <= '0;
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
