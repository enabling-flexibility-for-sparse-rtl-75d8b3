// decompressor: memory-side decompressor with bypass.
//
// Tensors are kept compressed in HBM to save transfer time and energy; a dense
// sub-accelerator needs them uncompressed, a sparse one can take them as they
// are.  Input is one 16x16 tile as a stream of compressed fibres (fibre 0..15
// in order, each a run of nonzeros with coordinate and value, the last one
// flagged eof, an empty fibre given as a single item with nz=0, eof=1).
//   bypass = 0: writes the dense tile, word f*16+c = value or zero, at base+0..255,
//               one word per cycle (256 cycles per tile).
//   bypass = 1: writes the compressed image: the i-th nonzero of fibre f to
//               VAL (base+f*16+i) and its coordinate to CRD (base+256+f*16+i),
//               and the fibre's count to CNT (base+512+f); one write per cycle.
// The paper names the unit and its purpose only; the stream format, the image
// layout and this sequencing are this design's.  `base` and `bypass` are taken
// when the first item of a tile is accepted; `idle` is high between tiles; `tile_done` pulses after the last
// write of a tile.
module decompressor
  import aespa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fiber_item_t in_item,
  input  logic        bypass,
  input  addr_t       base,
  output logic        wr_valid,
  output fill_wr_t    wr,
  output logic        tile_done,
  output logic        idle
);
  typedef enum logic [1:0] {S_IDLE, S_DENSE, S_BYP} state_e;
  typedef enum logic [1:0] {PH_VAL, PH_CRD, PH_CNT} phase_e;
  state_e state;
  phase_e ph;

  addr_t base_q;
  crd_t  f, i;
  cnt_t  cnt;
  logic  fib_done;
  logic  hit;

  // Dense: the current input item lands on position (f, i).
  assign hit = in_valid && !fib_done && in_item.nz && (in_item.crd == i);

  always_comb begin
    in_ready = 1'b0;
    wr_valid = 1'b0;
    wr       = '{addr: base_q, data: '0};
    unique case (state)
      S_DENSE: begin
        wr_valid = fib_done || in_valid;
        wr.addr  = base_q + addr_t'({f, i});
        wr.data  = hit ? in_item.val : '0;
        in_ready = hit || (in_valid && !fib_done && !in_item.nz && i == crd_t'(TILE - 1));
      end
      S_BYP: begin
        wr_valid = in_valid;
        if (!in_item.nz || ph == PH_CNT) begin
          wr.addr  = base_q + addr_t'(2 * REG_WORDS) + addr_t'(f);
          wr.data  = data_t'({27'd0, in_item.nz ? cnt_t'(cnt + 1'b1) : cnt});
          in_ready = 1'b1;
        end else if (ph == PH_VAL) begin
          wr.addr  = base_q + addr_t'({f, cnt[CRD_W-1:0]});
          wr.data  = in_item.val;
        end else begin
          wr.addr  = base_q + addr_t'(REG_WORDS) + addr_t'({f, cnt[CRD_W-1:0]});
          wr.data  = data_t'(in_item.crd);
          in_ready = !in_item.eof;
        end
      end
      default: ;
    endcase
  end

  assign idle = (state == S_IDLE);

  always_ff @(posedge clk) begin
    tile_done <= 1'b0;
    if (!rst_n) begin
      state    <= S_IDLE;
      ph       <= PH_VAL;
      base_q   <= '0;
      f        <= '0;
      i        <= '0;
      cnt      <= '0;
      fib_done <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          base_q   <= base;
          f        <= '0;
          i        <= '0;
          cnt      <= '0;
          ph       <= PH_VAL;
          fib_done <= 1'b0;
          state    <= bypass ? S_BYP : S_DENSE;
        end
        S_DENSE: if (wr_valid) begin
          if (in_ready && in_item.eof && i != crd_t'(TILE - 1)) fib_done <= 1'b1;
          i <= i + 1'b1;
          if (i == crd_t'(TILE - 1)) begin
            fib_done <= 1'b0;
            f <= f + 1'b1;
            if (f == crd_t'(TILE - 1)) begin
              state     <= S_IDLE;
              tile_done <= 1'b1;
            end
          end
        end
        S_BYP: if (in_valid) begin
          if (!in_item.nz || ph == PH_CNT) begin
            ph  <= PH_VAL;
            cnt <= '0;
            f   <= f + 1'b1;
            if (f == crd_t'(TILE - 1)) begin
              state     <= S_IDLE;
              tile_done <= 1'b1;
            end
          end else if (ph == PH_VAL) begin
            ph <= PH_CRD;
          end else if (in_item.eof) begin
            ph <= PH_CNT;
          end else begin
            ph  <= PH_VAL;
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_empty_is_eof: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_item.nz) |-> in_item.eof);
endmodule
