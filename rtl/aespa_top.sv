// aespa_top: heterogeneous sparse tensor accelerator with four kinds of sub-accelerator.
//
// Four sub-accelerator clusters, one of each dataflow class (TPU-like dense
// GEMM, EIE-like SpMM, ExTensor-like inner-product SpGEMM, OuterSPACE-like
// outer-product SpGEMM; 16 int32 PEs each), share a global scratchpad that is
// split into one double-buffered slice per cluster.  A crossbar NoC lets any
// cluster read operand tiles from, and write results to, any slice, so one
// kernel can be split over several clusters (single-kernel scheduling, with
// split-K partial outputs merged by accumulate writes) or independent kernels
// can run side by side (many-kernel scheduling).  On the memory side every
// slice has a decompressor (with bypass for sparse clusters) and a
// U_M C_K -> U_K C_M format converter.
//
// Ports:
//   hbm_*   : fibre stream from off-chip memory; each item names its slice, its
//             path (decompress / bypass / convert) and the operand image base.
//             Writes land in the slice's fill bank.
//   task_*  : kernel tasks into the task queue (see task_t in aespa_pkg).
//   swap    : per-slice double-buffer swap pulse.
//   host_rd_*: read any bank of any slice, data one cycle later.
//   status  : cluster busy, per-cluster task-done pulses, ingress idle and
//             tile-done pulses, queue state, and
//             event pulses (read/write NoC waits, queue head-of-line stalls).
// The structure (clusters, sliced double-buffered scratchpad, NoC, converters,
// task queue) follows the paper; the crossbar, the stream/task formats and all
// timing are this design's.
module aespa_top
  import aespa_pkg::*;
#(
  parameter int BANK_WORDS = 2097152,
  parameter int QDEPTH     = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            hbm_valid,
  output logic            hbm_ready,
  input  hbm_item_t       hbm_item,
  input  logic            task_valid,
  output logic            task_ready,
  input  task_t           task_in,
  input  logic [N_CL-1:0] swap,
  output logic [N_CL-1:0] bank_sel,
  input  logic            host_rd_en,
  input  slice_t          host_rd_slice,
  input  logic            host_rd_bank,
  input  addr_t           host_rd_addr,
  output data_t           host_rd_data,
  output logic [N_CL-1:0] cl_busy,
  output logic [N_CL-1:0] cl_task_done,
  output logic [N_CL-1:0] ingress_idle,
  output logic [N_CL-1:0] ingress_tile_done,
  output logic            queue_empty,
  output logic            ev_hol_stall,
  output logic [N_CL-1:0] ev_rd_wait,
  output logic [N_CL-1:0] ev_wr_wait
);
  // ---------------- memory-side ingress: decompressors and converters ----
  logic [N_CL-1:0] dec_in_v, dec_rdy, dec_wv, dec_idle, dec_done;
  logic [N_CL-1:0] cvt_in_v, cvt_rdy, cvt_wv, cvt_idle, cvt_done;
  fill_wr_t        dec_wr [N_CL];
  fill_wr_t        cvt_wr [N_CL];
  logic [N_CL-1:0] fill_we;
  fill_wr_t        fill_wr [N_CL];

  for (genvar s = 0; s < N_CL; s++) begin : g_in
    logic to_me;
    assign to_me       = hbm_valid && (int'(hbm_item.slice) == s);
    // A slice's two units share its fill port: a tile enters one only while
    // the other is idle.
    assign dec_in_v[s] = to_me && (hbm_item.path != PATH_CONVERT) && cvt_idle[s];
    assign cvt_in_v[s] = to_me && (hbm_item.path == PATH_CONVERT) && dec_idle[s];

    decompressor u_dec (
      .clk, .rst_n,
      .in_valid(dec_in_v[s]), .in_ready(dec_rdy[s]), .in_item(hbm_item.item),
      .bypass(hbm_item.path == PATH_BYPASS), .base(hbm_item.base),
      .wr_valid(dec_wv[s]), .wr(dec_wr[s]), .tile_done(dec_done[s]), .idle(dec_idle[s])
    );
    format_converter u_cvt (
      .clk, .rst_n,
      .in_valid(cvt_in_v[s]), .in_ready(cvt_rdy[s]), .in_item(hbm_item.item),
      .base(hbm_item.base),
      .wr_valid(cvt_wv[s]), .wr(cvt_wr[s]), .tile_done(cvt_done[s]), .idle(cvt_idle[s])
    );
    assign fill_we[s]      = dec_wv[s] || cvt_wv[s];
    assign fill_wr[s]      = dec_wv[s] ? dec_wr[s] : cvt_wr[s];
    assign ingress_idle[s] = dec_idle[s] && cvt_idle[s];
    assign ingress_tile_done[s] = dec_done[s] || cvt_done[s];
  end

  always_comb begin
    hbm_ready = 1'b0;
    for (int s = 0; s < N_CL; s++)
      if (int'(hbm_item.slice) == s)
        hbm_ready = (hbm_item.path == PATH_CONVERT) ? (cvt_in_v[s] && cvt_rdy[s])
                                                    : (dec_in_v[s] && dec_rdy[s]);
  end

  // ---------------- task queue ----------------
  logic [N_CL-1:0] cl_start;
  task_t           cl_task;

  task_ctrl #(.QDEPTH(QDEPTH)) u_ctrl (
    .clk, .rst_n,
    .push_valid(task_valid), .push_ready(task_ready), .push_task(task_in),
    .cl_busy, .cl_start, .cl_task, .queue_empty, .hol_stall(ev_hol_stall)
  );

  // ---------------- clusters and NoC ----------------
  logic [N_CL-1:0] rd_req_v, rd_gnt, rd_rsp_v;
  slice_t          rd_req_tgt [N_CL];
  addr_t           rd_req_addr [N_CL];
  data_t           rd_rsp_data [N_CL];
  logic [N_CL-1:0] wr_req_v, wr_gnt, wr_rsp_v;
  slice_t          wr_req_tgt [N_CL];
  owr_t            wr_req_data [N_CL];
  data_t           wr_rsp_data [N_CL];

  logic [N_CL-1:0] sl_rd_en, sl_wr_en;
  addr_t           sl_rd_addr [N_CL];
  data_t           sl_rd_data [N_CL];
  owr_t            sl_wr [N_CL];
  data_t           sl_wr_rsp [N_CL];
  data_t           sl_host_data [N_CL];

  for (genvar c = 0; c < N_CL; c++) begin : g_cl
    sub_accel_cluster #(.KIND(cluster_e'(c))) u_cl (
      .clk, .rst_n,
      .start(cl_start[c]), .start_task(cl_task),
      .busy(cl_busy[c]), .task_done(cl_task_done[c]),
      .rd_req_valid(rd_req_v[c]), .rd_req_tgt(rd_req_tgt[c]), .rd_req_addr(rd_req_addr[c]),
      .rd_grant(rd_gnt[c]), .rd_rsp_valid(rd_rsp_v[c]), .rd_rsp_data(rd_rsp_data[c]),
      .wr_req_valid(wr_req_v[c]), .wr_req_tgt(wr_req_tgt[c]), .wr_req_data(wr_req_data[c]),
      .wr_grant(wr_gnt[c])
    );
    assign sl_wr_rsp[c] = '0;   // writes need no answer
  end

  assign ev_rd_wait = rd_req_v & ~rd_gnt;
  assign ev_wr_wait = wr_req_v & ~wr_gnt;

  noc_xbar #(.N_REQ(N_CL), .N_TGT(N_CL), .REQ_T(addr_t), .RSP_T(data_t)) u_rd_noc (
    .clk, .rst_n,
    .req_valid(rd_req_v), .req_tgt(rd_req_tgt), .req_data(rd_req_addr), .req_grant(rd_gnt),
    .tgt_valid(sl_rd_en), .tgt_data(sl_rd_addr), .tgt_rsp(sl_rd_data),
    .rsp_valid(rd_rsp_v), .rsp_data(rd_rsp_data)
  );

  noc_xbar #(.N_REQ(N_CL), .N_TGT(N_CL), .REQ_T(owr_t), .RSP_T(data_t)) u_wr_noc (
    .clk, .rst_n,
    .req_valid(wr_req_v), .req_tgt(wr_req_tgt), .req_data(wr_req_data), .req_grant(wr_gnt),
    .tgt_valid(sl_wr_en), .tgt_data(sl_wr), .tgt_rsp(sl_wr_rsp),
    .rsp_valid(wr_rsp_v), .rsp_data(wr_rsp_data)
  );

  // ---------------- global scratchpad slices ----------------
  slice_t host_slice_q;
  always_ff @(posedge clk) if (host_rd_en) host_slice_q <= host_rd_slice;
  assign host_rd_data = sl_host_data[host_slice_q];

  for (genvar s = 0; s < N_CL; s++) begin : g_sl
    gbuf_slice #(.BANK_WORDS(BANK_WORDS)) u_slice (
      .clk, .rst_n,
      .swap(swap[s]), .sel(bank_sel[s]),
      .fill_we(fill_we[s]), .fill_addr(fill_wr[s].addr), .fill_data(fill_wr[s].data),
      .rd_en(sl_rd_en[s]), .rd_addr(sl_rd_addr[s]), .rd_data(sl_rd_data[s]),
      .wr_en(sl_wr_en[s]), .wr_addr(sl_wr[s].addr), .wr_data(sl_wr[s].data), .wr_accum(sl_wr[s].accum),
      .host_rd_en(host_rd_en && int'(host_rd_slice) == s), .host_rd_bank,
      .host_rd_addr, .host_rd_data(sl_host_data[s])
    );
  end

  a_no_swap_while_filling: assert property (@(posedge clk) disable iff (!rst_n)
    (swap & ~ingress_idle) == '0);
endmodule
