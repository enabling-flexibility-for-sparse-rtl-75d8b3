// aespa_workloads_tb: runs one output tile of each evaluated workload through
// the whole accelerator at its default size.
//
// The nine workloads are matrix products whose sizes and densities come from
// the evaluation table (HPC matrices, DNN layers, GNN graphs).  Only their
// densities matter for a single tile, so each one is reduced to one 16x16
// output tile with K = 64: four 16x16x16 tile pairs, A drawn at the
// workload's A density and B at its B density (uniform random sparsity, as
// the evaluation assumes).  The four K-parts go to the four clusters and are
// merged by accumulating into one output that an all-zero tile cleared first
// (the single-kernel split-K strategy).  The EIE-like part uses the
// compressed-A mode when A is the sparser operand and the compressed-B mode
// otherwise.  Each workload's operands stream into the fill banks through
// the memory side (dense images decompressed, compressed fibres bypassed, the
// OuterSPACE-like A converted to U_K C_M); the banks then swap, the four
// tasks run, and the output
// is read from the compute bank through the host port and compared with a
// plain matrix-product reference.  The cycles from the first task push to
// the last task's end are printed per workload; at one tile they are set
// mostly by the local-buffer loads and the TPU-like pipeline, not by density.
// Then journals, the one workload that fits the scratchpad whole, runs at its
// full size (124x124x62, 8x8x4 tiles, 256 tile tasks) split along K over the
// four clusters, and all 32 output tiles are checked.
module aespa_workloads_tb;
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

  always #5 clk = ~clk;

  aespa_top dut (.*);

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
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

  // Workload densities in units of 0.001 %.
  typedef struct {
    string name;
    int    da;
    int    db;
  } wl_t;

  localparam int NWL = 9;
  wl_t wl [NWL] = '{
    '{"chem97ZtZ",       110,    100000},
    '{"journals",        78500,  100000},
    '{"m3plates",        5,      100000},
    '{"synthetic_dense", 100000, 100000},
    '{"bibd_81_3",       93,     100000},
    '{"speech",          5000,   100000},
    '{"gnmt",            50000,  30000},
    '{"transformer",     50000,  30000},
    '{"citeseer",        110,    850}
  };

  // Random matrix, each element nonzero with probability d / 100000.
  function automatic void gen_fine(output mat_t x, input int d);
    for (int i = 0; i < TILE*TILE; i++) begin
      if (int'($urandom_range(99999)) < d) begin
        int v;
        v = int'($urandom_range(126)) - 63;
        if (v == 0) v = 64;
        x[i] = data_t'(v);
      end else x[i] = '0;
    end
  endfunction

  task automatic send_tile(input int sl, input ingress_path_e path, input int base,
                           input mat_t x, input bit by_row);
    fstream_t q;
    fibre_stream(x, by_row, q);
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
                               input int os, input int ob);
    return '{cluster: cl, mode: mode, regions: regions,
             a_slice: slice_t'(as), a_base: addr_t'(ab), b_slice: slice_t'(bs), b_base: addr_t'(bb),
             o_slice: slice_t'(os), o_base: addr_t'(ob), o_accum: 1'b1};
  endfunction

  localparam int OB = 8192;

  initial begin
    mat_t ka [4], kb [4], kref, part, zero, got;
    int start_cyc, nnz_a;
    logic eie_mode;
    hbm_valid = 0; hbm_item = '0; task_valid = 0; task_in = '0; swap = '0;
    host_rd_en = 0; host_rd_bank = 0; host_rd_slice = '0; host_rd_addr = '0;
    for (int i = 0; i < TILE*TILE; i++) zero[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    for (int w = 0; w < NWL; w++) begin
      nnz_a = 0;
      for (int p = 0; p < 4; p++) begin
        gen_fine(ka[p], wl[w].da);
        gen_fine(kb[p], wl[w].db);
        for (int i = 0; i < TILE*TILE; i++) if (ka[p][i] != 0) nnz_a++;
      end
      kref = zero;
      for (int p = 0; p < 4; p++) begin
        matmul(ka[p], kb[p], part);
        for (int i = 0; i < TILE*TILE; i++) kref[i] += part[i];
      end
      // compressed-A mode when A is the sparser operand
      eie_mode = (wl[w].da <= wl[w].db);

      send_tile(0, PATH_DECOMP,  0,    ka[0], 1'b1);             // TPU-like: dense images
      send_tile(0, PATH_DECOMP,  1024, kb[0], 1'b1);
      if (eie_mode) begin
        send_tile(1, PATH_BYPASS, 0,    ka[1], 1'b1);            // A as U_M C_K
        send_tile(1, PATH_DECOMP, 1024, kb[1], 1'b1);            // B dense
      end else begin
        send_tile(1, PATH_DECOMP, 0,    ka[1], 1'b1);            // A dense
        send_tile(1, PATH_BYPASS, 1024, kb[1], 1'b0);            // B as U_N C_K
      end
      send_tile(2, PATH_BYPASS,  0,    ka[2], 1'b1);             // ExTensor-like
      send_tile(2, PATH_BYPASS,  1024, kb[2], 1'b0);
      send_tile(3, PATH_CONVERT, 0,    ka[3], 1'b1);             // OuterSPACE-like
      send_tile(3, PATH_BYPASS,  1024, kb[3], 1'b1);
      send_tile(1, PATH_DECOMP,  OB,   zero,  1'b1);             // clear the output
      swap_all();

      start_cyc = int'($time / 10);
      push_task(mk(CL_TPU, 0, 6'b001_001, 0, 0, 0, 1024, 1, OB));
      push_task(mk(CL_EIE, eie_mode, eie_mode ? 6'b001_111 : 6'b111_001, 1, 0, 1, 1024, 1, OB));
      push_task(mk(CL_EXT, 0, 6'b111_111, 2, 0, 2, 1024, 1, OB));
      push_task(mk(CL_OSP, 0, 6'b111_111, 3, 0, 3, 1024, 1, OB));
      while (!(queue_empty && cl_busy == '0)) @(posedge clk);
      $display("%-16s A nnz %4d of 1024, EIE-like mode %0d: %0d cycles",
               wl[w].name, nnz_a, eie_mode, int'($time / 10) - start_cyc);

      read_tile(1, bank_sel[1], OB, got);
      for (int i = 0; i < TILE*TILE; i++)
        check(got[i] == kref[i], $sformatf("%s: O[%0d] = %0d expected %0d",
                                           wl[w].name, i, got[i], kref[i]));
    end

    // ---------------- journals at its full size ----------------
    journals_full();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // journals, 124x124 times 124x62 (78.5 % and 100 % dense), padded with zeros
  // to 8x8 by 8x4 tiles.  K is split over the clusters: K-tile kt goes to
  // cluster kt mod 4, whose slice holds its A and B tiles in its own format.
  // All 256 tile tasks accumulate into 32 output tiles spread over the four
  // slices, cleared first by all-zero tiles.
  localparam int JM = 124, JK = 124, JN = 62;
  localparam int JMT = 8, JKT = 8, JNT = 4;
  localparam int JOB = 65536;
  data_t ja [JMT*TILE][JKT*TILE];
  data_t jb [JKT*TILE][JNT*TILE];

  function automatic int a_base(input int mt, input int kt);
    return (mt*2 + kt/4) * 1024;
  endfunction
  function automatic int b_base(input int kt, input int nt);
    return 16384 + ((kt/4)*JNT + nt) * 1024;
  endfunction
  function automatic int o_slice(input int mt, input int nt);
    return (mt*JNT + nt) % N_CL;
  endfunction
  function automatic int o_base(input int mt, input int nt);
    return JOB + (mt*JNT + nt) * TILE*TILE;
  endfunction

  task automatic journals_full();
    mat_t ta, tb, zero, got, exp_o;
    int start_cyc, nnz_a, ntasks;
    for (int i = 0; i < TILE*TILE; i++) zero[i] = '0;
    nnz_a = 0;
    for (int r = 0; r < JMT*TILE; r++)
      for (int c = 0; c < JKT*TILE; c++) begin
        ja[r][c] = (r < JM && c < JK && $urandom_range(99999) < 78500)
                   ? data_t'(int'($urandom_range(126)) - 63) : '0;
        if (ja[r][c] != 0) nnz_a++;
      end
    for (int r = 0; r < JKT*TILE; r++)
      for (int c = 0; c < JNT*TILE; c++)
        jb[r][c] = (r < JK && c < JN) ? data_t'(int'($urandom_range(126)) - 63) : '0;

    // operands, each K-part in its cluster's format
    for (int kt = 0; kt < JKT; kt++) begin
      int cl;
      cl = kt % N_CL;
      for (int mt = 0; mt < JMT; mt++) begin
        for (int i = 0; i < TILE; i++)
          for (int j = 0; j < TILE; j++) ta[i*TILE+j] = ja[mt*TILE+i][kt*TILE+j];
        case (cl)
          0:       send_tile(cl, PATH_DECOMP,  a_base(mt, kt), ta, 1'b1);
          3:       send_tile(cl, PATH_CONVERT, a_base(mt, kt), ta, 1'b1);
          default: send_tile(cl, PATH_BYPASS,  a_base(mt, kt), ta, 1'b1);
        endcase
      end
      for (int nt = 0; nt < JNT; nt++) begin
        for (int i = 0; i < TILE; i++)
          for (int j = 0; j < TILE; j++) tb[i*TILE+j] = jb[kt*TILE+i][nt*TILE+j];
        case (cl)
          0, 1:    send_tile(cl, PATH_DECOMP, b_base(kt, nt), tb, 1'b1);
          2:       send_tile(cl, PATH_BYPASS, b_base(kt, nt), tb, 1'b0);
          default: send_tile(cl, PATH_BYPASS, b_base(kt, nt), tb, 1'b1);
        endcase
      end
    end
    for (int mt = 0; mt < JMT; mt++)
      for (int nt = 0; nt < JNT; nt++)
        send_tile(o_slice(mt, nt), PATH_DECOMP, o_base(mt, nt), zero, 1'b1);
    swap_all();

    start_cyc = int'($time / 10);
    ntasks = 0;
    for (int mt = 0; mt < JMT; mt++)
      for (int nt = 0; nt < JNT; nt++)
        for (int kt = 0; kt < JKT; kt++) begin
          int cl;
          cl = kt % N_CL;
          case (cl)
            0: push_task(mk(CL_TPU, 0, 6'b001_001, cl, a_base(mt, kt), cl, b_base(kt, nt),
                            o_slice(mt, nt), o_base(mt, nt)));
            1: push_task(mk(CL_EIE, 1, 6'b001_111, cl, a_base(mt, kt), cl, b_base(kt, nt),
                            o_slice(mt, nt), o_base(mt, nt)));
            2: push_task(mk(CL_EXT, 0, 6'b111_111, cl, a_base(mt, kt), cl, b_base(kt, nt),
                            o_slice(mt, nt), o_base(mt, nt)));
            default: push_task(mk(CL_OSP, 0, 6'b111_111, cl, a_base(mt, kt), cl, b_base(kt, nt),
                                  o_slice(mt, nt), o_base(mt, nt)));
          endcase
          ntasks++;
        end
    while (!(queue_empty && cl_busy == '0)) @(posedge clk);
    $display("journals full (%0dx%0dx%0d, A nnz %0d): %0d tile tasks in %0d cycles",
             JM, JK, JN, nnz_a, ntasks, int'($time / 10) - start_cyc);

    for (int mt = 0; mt < JMT; mt++)
      for (int nt = 0; nt < JNT; nt++) begin
        read_tile(o_slice(mt, nt), bank_sel[o_slice(mt, nt)], o_base(mt, nt), got);
        for (int i = 0; i < TILE; i++)
          for (int j = 0; j < TILE; j++) begin
            data_t acc;
            acc = '0;
            for (int k = 0; k < JKT*TILE; k++) acc += ja[mt*TILE+i][k] * jb[k][nt*TILE+j];
            exp_o[i*TILE+j] = acc;
          end
        for (int i = 0; i < TILE*TILE; i++)
          check(got[i] == exp_o[i], $sformatf("journals O tile (%0d,%0d)[%0d] = %0d expected %0d",
                                              mt, nt, i, got[i], exp_o[i]));
      end
  endtask
endmodule
