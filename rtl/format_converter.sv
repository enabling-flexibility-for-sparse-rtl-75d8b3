// format_converter: hardware U_M C_K -> U_K C_M format converter.
//
// The paper places format converters next to sub-accelerators whose compute
// format differs from the format the host sent, with exactly this example:
// a tile compressed by rows (U_M C_K, CSR-like) is turned into one compressed
// by columns (U_K C_M, CSC-like) for the outer-product sub-accelerator.  It is
// a counting-sort scatter: one fill counter per column k; each nonzero
// (row m, column k, value v) of the row-ordered input is written to
// VAL[base+k*16+cnt[k]] and its row id m to CRD[base+256+k*16+cnt[k]], then
// cnt[k] increments.  Because rows arrive in order, each column's row ids come
// out sorted.  After row 15 the 16 counters are written to CNT[base+512+k].
// Input: the compressed-fibre stream of decompressor.sv (fibre = row m).
// Timing (this design's): two writes per nonzero, one per empty row, 16 for
// the counts; one write per cycle.  `idle` is high between tiles; `tile_done` pulses after the last one.
module format_converter
  import aespa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fiber_item_t in_item,
  input  addr_t       base,
  output logic        wr_valid,
  output fill_wr_t    wr,
  output logic        tile_done,
  output logic        idle
);
  typedef enum logic [1:0] {S_IDLE, S_VAL, S_CRD, S_CNT} state_e;
  state_e state;

  addr_t base_q;
  crd_t  m;
  crd_t  k_out;
  cnt_t  cnt [TILE];
  cnt_t  c;

  assign c = cnt[in_item.crd];

  always_comb begin
    in_ready = 1'b0;
    wr_valid = 1'b0;
    wr       = '{addr: base_q, data: '0};
    unique case (state)
      S_VAL: begin
        wr_valid = in_valid && in_item.nz;
        in_ready = in_valid && !in_item.nz;   // empty row: nothing to write
        wr.addr  = base_q + addr_t'({in_item.crd, c[CRD_W-1:0]});
        wr.data  = in_item.val;
      end
      S_CRD: begin
        wr_valid = 1'b1;
        in_ready = 1'b1;
        wr.addr  = base_q + addr_t'(REG_WORDS) + addr_t'({in_item.crd, c[CRD_W-1:0]});
        wr.data  = data_t'(m);
      end
      S_CNT: begin
        wr_valid = 1'b1;
        wr.addr  = base_q + addr_t'(2 * REG_WORDS) + addr_t'(k_out);
        wr.data  = data_t'(cnt[k_out]);
      end
      default: ;
    endcase
  end

  assign idle = (state == S_IDLE);

  always_ff @(posedge clk) begin
    tile_done <= 1'b0;
    if (!rst_n) begin
      state  <= S_IDLE;
      base_q <= '0;
      m      <= '0;
      k_out  <= '0;
      for (int k = 0; k < TILE; k++) cnt[k] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          base_q <= base;
          m      <= '0;
          state  <= S_VAL;
        end
        S_VAL: if (in_valid) begin
          if (in_item.nz) state <= S_CRD;
          else begin
            m <= m + 1'b1;
            if (m == crd_t'(TILE - 1)) begin
              state <= S_CNT;
              k_out <= '0;
            end
          end
        end
        S_CRD: begin
          cnt[in_item.crd] <= c + 1'b1;
          state <= S_VAL;
          if (in_item.eof) begin
            m <= m + 1'b1;
            if (m == crd_t'(TILE - 1)) begin
              state <= S_CNT;
              k_out <= '0;
            end
          end
        end
        S_CNT: begin
          k_out <= k_out + 1'b1;
          cnt[k_out] <= '0;
          if (k_out == crd_t'(TILE - 1)) begin
            state     <= S_IDLE;
            tile_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_empty_is_eof: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_item.nz) |-> in_item.eof);
endmodule
