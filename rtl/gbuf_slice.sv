// gbuf_slice: one slice of the double-buffered global scratchpad.
//
// The paper's global scratchpad is double buffered and distributed so that
// each sub-accelerator cluster is backed by one slice; partitions inside a
// slice are free-form (any operand image at any base address).  A slice has
// two banks.  `sel` names the compute bank; the other one is the fill bank.
//   fill port : memory-side writes (decompressor / format converter) into the
//               fill bank, so the next tiles load while the current ones run.
//   rd port   : reads of the compute bank for tile loads, 1-cycle latency.
//   wr port   : output writes into the compute bank; with wr_accum the word is
//               added to what is stored (read-add-write in one cycle), which
//               merges partial outputs of a kernel split along K.
//   host port : reads of either bank, 1-cycle latency.
// A `swap` pulse exchanges the banks.  Capacity: the paper's 64 MB scratchpad
// divided over 4 slices is 16 MB per slice, i.e. two banks of 2^21 int32
// words; the memory is not reset (it is data, written before it is read).
module gbuf_slice
  import aespa_pkg::*;
#(
  parameter int BANK_WORDS = 2097152
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  swap,
  output logic  sel,
  input  logic  fill_we,
  input  addr_t fill_addr,
  input  data_t fill_data,
  input  logic  rd_en,
  input  addr_t rd_addr,
  output data_t rd_data,
  input  logic  wr_en,
  input  addr_t wr_addr,
  input  data_t wr_data,
  input  logic  wr_accum,
  input  logic  host_rd_en,
  input  logic  host_rd_bank,
  input  addr_t host_rd_addr,
  output data_t host_rd_data
);
  localparam int AW = $clog2(BANK_WORDS);

  data_t bank0 [BANK_WORDS];
  data_t bank1 [BANK_WORDS];

  logic [AW-1:0] fa, ra, wa, ha;
  assign fa = fill_addr[AW-1:0];
  assign ra = rd_addr[AW-1:0];
  assign wa = wr_addr[AW-1:0];
  assign ha = host_rd_addr[AW-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) sel <= 1'b0;
    else if (swap) sel <= !sel;
  end

  // Bank 0: fill bank when sel = 1, compute bank when sel = 0.
  always_ff @(posedge clk) begin
    if (fill_we && sel) bank0[fa] <= fill_data;
    if (wr_en && !sel)  bank0[wa] <= wr_accum ? bank0[wa] + wr_data : wr_data;
  end
  always_ff @(posedge clk) begin
    if (fill_we && !sel) bank1[fa] <= fill_data;
    if (wr_en && sel)    bank1[wa] <= wr_accum ? bank1[wa] + wr_data : wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)      rd_data      <= sel ? bank1[ra] : bank0[ra];
    if (host_rd_en) host_rd_data <= host_rd_bank ? bank1[ha] : bank0[ha];
  end

  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    (fill_we |-> int'(fill_addr) < BANK_WORDS) and (wr_en |-> int'(wr_addr) < BANK_WORDS));
endmodule
