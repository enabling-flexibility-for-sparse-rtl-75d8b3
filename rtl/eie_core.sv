// eie_core: EIE-like SpMM sub-accelerator core, CCF (A,B) = U_M U_K, U_N C_K
// (mode 0) or U_M C_K, U_K U_N (mode 1).
//
// As in the paper, each of the 16 PEs holds one column of B and owns one
// output column (parallelism bound N), rows of A are streamed over a bus to
// all PEs together with their position k, an index comparison in every PE
// finds the effectual products and puts them into the PE's MAC queue, and each
// PE accumulates O[m][n] in an output register.
//   mode 0: A dense (A_VAL[m*16+k]); B compressed by column: B_CRD/B_VAL[n*16+i]
//           hold the row ids and values of column n, B_CNT[n] its nonzero count.
//           The bus carries all 16 positions of row m.
//   mode 1: A compressed by row (A_CRD/A_VAL[m*16+i], A_CNT[m]); B dense
//           (B_VAL[k*16+n]).  The bus carries only the nonzeros of row m.
// After a row has been broadcast and every MAC queue has drained, the 16
// output registers are copied into the output buffer and cleared.
//
// Interface and output stream as in tpu_core.  Timing (this design's): one
// bus word per cycle, then the MAC queues drain.  A mode-0 row costs 17
// cycles, 18 if the last bus word (k = 15) matched somewhere; a mode-1 row
// costs its nonzero count plus 2.  The first output word follows the start
// pulse by the sum over the 16 rows plus 2 cycles.
module eie_core
  import aespa_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  lb_wr_t    lb_wr,
  input  logic      mode,
  input  logic      start,
  output logic      busy,
  output logic      done,
  output logic      out_valid,
  input  logic      out_ready,
  output out_word_t out_word
);
  typedef enum logic [1:0] {S_IDLE, S_BUS, S_FLUSH, S_DRAIN} state_e;
  state_e state;

  data_t a_val [REG_WORDS];
  crd_t  a_crd [REG_WORDS];
  cnt_t  a_cnt [TILE];
  data_t b_val [REG_WORDS];
  crd_t  b_crd [REG_WORDS];
  cnt_t  b_cnt [TILE];
  data_t o_buf [REG_WORDS];

  logic  mode_q;
  crd_t  m;
  cnt_t  p;
  idx_t  oidx;

  logic  bus_valid, bus_last, bus_stall, row_clear;
  crd_t  bus_k;
  data_t bus_v;
  cnt_t  ptr   [NPE];
  logic  q_full [NPE];
  logic  idle  [NPE];
  data_t acc   [NPE];
  logic  all_idle, any_full;

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

  // Bus: position and value of the current broadcast word of row m.
  always_comb begin
    if (mode_q) begin
      bus_valid = (state == S_BUS) && (p < a_cnt[m]);
      bus_k     = a_crd[{m, p[CRD_W-1:0]}];
      bus_last  = (p + 1'b1 >= a_cnt[m]);
    end else begin
      bus_valid = (state == S_BUS);
      bus_k     = p[CRD_W-1:0];
      bus_last  = (p == cnt_t'(TILE - 1));
    end
    bus_v = a_val[{m, p[CRD_W-1:0]}];
  end

  always_comb begin
    all_idle = 1'b1;
    any_full = 1'b0;
    for (int n = 0; n < NPE; n++) begin
      all_idle &= idle[n];
      any_full |= q_full[n];
    end
  end
  assign bus_stall = any_full;
  assign row_clear = (state == S_FLUSH) && all_idle;

  for (genvar n = 0; n < NPE; n++) begin : g_pe
    eie_pe #(.QDEPTH(QDEPTH)) u_pe (
      .clk, .rst_n,
      .clear      (row_clear || start),
      .mode       (mode_q),
      .bus_valid  (bus_valid && !bus_stall),
      .bus_k, .bus_v,
      .b_cnt      (b_cnt[n]),
      .ptr        (ptr[n]),
      .b_crd_ptr  (b_crd[n * TILE + int'(ptr[n][CRD_W-1:0])]),
      .b_val_ptr  (b_val[n * TILE + int'(ptr[n][CRD_W-1:0])]),
      .b_val_dense(b_val[int'(bus_k) * TILE + n]),
      .q_full     (q_full[n]),
      .idle       (idle[n]),
      .acc        (acc[n])
    );
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state  <= S_IDLE;
      m      <= '0;
      p      <= '0;
      oidx   <= '0;
      mode_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_BUS;
          mode_q <= mode;
          m <= '0;
          p <= '0;
        end
        S_BUS: begin
          if (!bus_valid || bus_last) begin
            if (!bus_stall) state <= S_FLUSH;
          end
          if (bus_valid && !bus_stall) p <= p + 1'b1;
        end
        S_FLUSH: if (all_idle) begin
          for (int n = 0; n < NPE; n++) o_buf[{m, crd_t'(n)}] <= acc[n];
          p <= '0;
          m <= m + 1'b1;
          if (m == crd_t'(TILE - 1)) begin
            state <= S_DRAIN;
            oidx  <= '0;
          end else state <= S_BUS;
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
