// aespa_top_tb: end-to-end testbench of the heterogeneous accelerator at its
// default (full) size.
//
// Phase 1, many-kernel scheduling: four independent tile kernels, each in the
// format of one cluster, enter the scratchpad's fill banks through the memory
// side (dense operands decompressed, sparse ones bypassed, one converted from
// U_M C_K to U_K C_M), the banks swap, and five tasks run: one per cluster
// plus a second TPU-like task that waits at the head of the queue.  Operands
// of two clusters share a slice and two clusters write to one slice, so the
// NoC has to arbitrate.
// Phase 2, single-kernel scheduling: while phase 1 computes, the operands of
// one 16x64x16 product split along K into four parts (dense part on the
// TPU-like cluster, others on the sparse clusters, the EIE-like one in its
// compressed-A mode) stream into the other banks together with an all-zero
// tile that clears the output; after the swap all four parts accumulate into
// the same output, merging the partial sums.
// All results are read through the host port and compared with a plain
// matrix-product reference.  The testbench counts every mechanism (NoC read
// and write waits, head-of-line stalls, bank swaps, fills overlapping
// compute, decompress / bypass / convert tiles, accumulate merges, both EIE
// modes, tasks per cluster) and fails if one never happened.
module aespa_top_tb;
  import aespa_pkg::*;
  import tb_pkg::*;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            hbm_valid, hbm_ready, task_valid, task_ready, host_rd_en, host_rd_bank;
  hbm_item_t       hbm_item;
  task_t           task_in;
  logic [N_CL-1:0] swap, bank_sel, cl_busy, cl_task_done, ingress_idle, ingress_tile_done;
  logic [N_CL-1:0] ev_rd_wait, ev_wr_wait;
  logic            queue_empty, ev_hol_stall;
  slice_t          host_rd_slice;
  addr_t           host_rd_addr;
  data_t           host_rd_data;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_rd_wait = 0, n_wr_wait = 0, n_hol = 0, n_swap = 0, n_overlap = 0;
  int n_decomp = 0, n_bypass = 0, n_convert = 0, n_accum = 0, n_eie0 = 0, n_eie1 = 0;
  int n_done [N_CL] = '{0, 0, 0, 0};

  always #5 clk = ~clk;

  aespa_top dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_rd_wait += $countones(ev_rd_wait);
    n_wr_wait += $countones(ev_wr_wait);
    if (ev_hol_stall) n_hol++;
    n_swap += $countones(swap);
    if (ingress_idle != '1 && cl_busy != '0) n_overlap++;
    for (int c = 0; c < N_CL; c++) if (cl_task_done[c]) n_done[c]++;
  end

  // Send one tile through the memory side.
  task automatic send_tile(input int sl, input ingress_path_e path, input int base,
                           input mat_t x, input bit by_row);
    fstream_t q;
    fibre_stream(x, by_row, q);
    case (path)
      PATH_DECOMP:  n_decomp++;
      PATH_BYPASS:  n_bypass++;
      default:      n_convert++;
    endcase
    while (q.size() > 0) begin
      @(posedge clk);
      hbm_valid <= 1'b1;
      hbm_item  <= '{slice: slice_t'(sl), path: path, base: addr_t'(base), item: q[0]};
      do @(negedge clk); while (!hbm_ready);
      void'(q.pop_front());
    end
    @(posedge clk);
    hbm_valid <= 1'b0;
  endtask

  task automatic push_task(input task_t t);
    @(posedge clk);
    task_valid <= 1'b1;
    task_in    <= t;
    do @(negedge clk); while (!task_ready);
    @(posedge clk);
    task_valid <= 1'b0;
    if (t.o_accum) n_accum++;
    if (t.cluster == CL_EIE) begin
      if (t.mode) n_eie1++; else n_eie0++;
    end
  endtask

  task automatic read_tile(input int sl, input logic bank, input int base, output mat_t o);
    for (int i = 0; i < TILE*TILE; i++) begin
      @(posedge clk);
      host_rd_en <= 1'b1; host_rd_slice <= slice_t'(sl); host_rd_bank <= bank;
      host_rd_addr <= addr_t'(base + i);
      @(posedge clk);
      host_rd_en <= 1'b0;
      @(negedge clk);
      o[i] = host_rd_data;
    end
  endtask

  task automatic compare(input mat_t got, input mat_t exp_o, input string tag);
    for (int i = 0; i < TILE*TILE; i++)
      check(got[i] == exp_o[i], $sformatf("%s: O[%0d] = %0d expected %0d", tag, i, got[i], exp_o[i]));
  endtask

  task automatic swap_all();
    while (ingress_idle != '1) @(posedge clk);
    @(posedge clk);
    swap <= '1;
    @(posedge clk);
    swap <= '0;
    @(negedge clk);
  endtask

  function automatic task_t mk(input cluster_e cl, input logic mode, input logic [5:0] regions,
                               input int as, input int ab, input int bs, input int bb,
                               input int os, input int ob, input logic acc);
    return '{cluster: cl, mode: mode, regions: regions,
             a_slice: slice_t'(as), a_base: addr_t'(ab), b_slice: slice_t'(bs), b_base: addr_t'(bb),
             o_slice: slice_t'(os), o_base: addr_t'(ob), o_accum: acc};
  endfunction

  localparam int OB = 8192;   // output tile base in a slice

  initial begin
    mat_t a [4], b [4], o_ref [4], got;
    mat_t ka [4], kb [4], kref, part;
    int start_cyc, cyc;
    hbm_valid = 0; hbm_item = '0; task_valid = 0; task_in = '0; swap = '0;
    host_rd_en = 0; host_rd_bank = 0; host_rd_slice = '0; host_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---------------- phase 1: many kernels ----------------
    gen_mat(a[0], 90); gen_mat(b[0], 90);   // TPU-like: dense
    gen_mat(a[1], 70); gen_mat(b[1], 20);   // EIE-like mode 0: A dense, B sparse
    gen_mat(a[2], 25); gen_mat(b[2], 25);   // ExTensor-like
    gen_mat(a[3], 15); gen_mat(b[3], 30);   // OuterSPACE-like
    for (int i = 0; i < 4; i++) matmul(a[i], b[i], o_ref[i]);

    send_tile(0, PATH_DECOMP,  0,    a[0], 1'b1);   // U_M U_K
    send_tile(0, PATH_DECOMP,  1024, b[0], 1'b1);   // U_K U_N
    send_tile(0, PATH_DECOMP,  2048, a[1], 1'b1);   // EIE A dense, in the TPU's slice
    send_tile(1, PATH_BYPASS,  1024, b[1], 1'b0);   // U_N C_K (columns)
    send_tile(2, PATH_BYPASS,  0,    a[2], 1'b1);   // U_M C_K
    send_tile(2, PATH_BYPASS,  1024, b[2], 1'b0);   // U_N C_K
    send_tile(3, PATH_CONVERT, 0,    a[3], 1'b1);   // U_M C_K from memory -> U_K C_M
    send_tile(3, PATH_BYPASS,  1024, b[3], 1'b1);   // U_K C_N (rows)
    swap_all();
    check(bank_sel == '1, "compute banks swapped to bank 1");

    start_cyc = $time / 10;
    push_task(mk(CL_TPU, 0, 6'b001_001, 0, 0,    0, 1024, 0, OB,       0));
    push_task(mk(CL_EIE, 0, 6'b111_001, 0, 2048, 1, 1024, 1, OB,       0));
    push_task(mk(CL_EXT, 0, 6'b111_111, 2, 0,    2, 1024, 3, OB + 512, 0));
    push_task(mk(CL_OSP, 0, 6'b111_111, 3, 0,    3, 1024, 3, OB,       0));
    push_task(mk(CL_TPU, 0, 6'b001_001, 0, 0,    0, 1024, 2, OB,       0));

    // ---------------- phase 2 operands, loaded while phase 1 runs ----------
    gen_mat(ka[0], 95); gen_mat(kb[0], 95);   // dense part        -> TPU-like
    gen_mat(ka[1], 10); gen_mat(kb[1], 90);   // sparse A, dense B -> EIE-like mode 1
    gen_mat(ka[2], 20); gen_mat(kb[2], 20);   // both sparse       -> ExTensor-like
    gen_mat(ka[3], 20); gen_mat(kb[3], 15);   // both sparse       -> OuterSPACE-like
    for (int i = 0; i < TILE*TILE; i++) kref[i] = '0;
    for (int p = 0; p < 4; p++) begin
      matmul(ka[p], kb[p], part);
      for (int i = 0; i < TILE*TILE; i++) kref[i] += part[i];
    end
    for (int i = 0; i < TILE*TILE; i++) got[i] = '0;
    send_tile(0, PATH_DECOMP,  0,    ka[0], 1'b1);
    send_tile(0, PATH_DECOMP,  1024, kb[0], 1'b1);
    send_tile(1, PATH_BYPASS,  0,    ka[1], 1'b1);
    send_tile(1, PATH_DECOMP,  1024, kb[1], 1'b1);
    send_tile(2, PATH_BYPASS,  0,    ka[2], 1'b1);
    send_tile(2, PATH_BYPASS,  1024, kb[2], 1'b0);
    send_tile(3, PATH_CONVERT, 0,    ka[3], 1'b1);
    send_tile(3, PATH_BYPASS,  1024, kb[3], 1'b1);
    send_tile(1, PATH_DECOMP,  OB,   got,   1'b1);   // all-zero tile clears the output

    // wait for phase 1
    while (!(queue_empty && cl_busy == '0)) @(posedge clk);
    cyc = $time / 10 - start_cyc;
    $display("phase 1: five tile kernels in %0d cycles", cyc);
    swap_all();
    check(bank_sel == '0, "compute banks swapped back to bank 0");

    // phase 1 results are now in the fill banks (bank 1)
    read_tile(0, 1'b1, OB,       got); compare(got, o_ref[0], "TPU-like");
    read_tile(1, 1'b1, OB,       got); compare(got, o_ref[1], "EIE-like");
    read_tile(3, 1'b1, OB + 512, got); compare(got, o_ref[2], "ExTensor-like");
    read_tile(3, 1'b1, OB,       got); compare(got, o_ref[3], "OuterSPACE-like");
    read_tile(2, 1'b1, OB,       got); compare(got, o_ref[0], "TPU-like second task");

    // ---------------- phase 2: one kernel split along K ----------------
    push_task(mk(CL_TPU, 0, 6'b001_001, 0, 0, 0, 1024, 1, OB, 1));
    push_task(mk(CL_EIE, 1, 6'b001_111, 1, 0, 1, 1024, 1, OB, 1));
    push_task(mk(CL_EXT, 0, 6'b111_111, 2, 0, 2, 1024, 1, OB, 1));
    push_task(mk(CL_OSP, 0, 6'b111_111, 3, 0, 3, 1024, 1, OB, 1));
    while (!(queue_empty && cl_busy == '0)) @(posedge clk);
    read_tile(1, 1'b0, OB, got);
    compare(got, kref, "split-K merged output");

    // ---------------- mechanisms ----------------
    check(n_rd_wait > 0, "NoC read wait never happened");
    check(n_wr_wait > 0, "NoC write wait never happened");
    check(n_hol > 0, "task-queue head-of-line stall never happened");
    check(n_swap == 8, $sformatf("bank swaps %0d, expected 8", n_swap));
    check(n_overlap > 0, "fill never overlapped compute");
    check(n_decomp > 0 && n_bypass > 0 && n_convert > 0, "an ingress path was never used");
    check(n_accum == 4, "accumulate merges");
    check(n_eie0 > 0 && n_eie1 > 0, "both EIE-like modes");
    check(n_done[0] == 3 && n_done[1] == 2 && n_done[2] == 2 && n_done[3] == 2,
          $sformatf("tasks done per cluster %0d %0d %0d %0d", n_done[0], n_done[1], n_done[2], n_done[3]));
    $display("mechanisms: rd_wait=%0d wr_wait=%0d hol_stall=%0d swaps=%0d fill_overlap=%0d decomp=%0d bypass=%0d convert=%0d accum=%0d eie_mode0=%0d eie_mode1=%0d",
             n_rd_wait, n_wr_wait, n_hol, n_swap, n_overlap, n_decomp, n_bypass, n_convert, n_accum, n_eie0, n_eie1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
