// eie_core_tb: self-checking testbench for eie_core (EIE-like SpMM core).
//
// Random 16x16 int32 operand tiles at several densities (including all-zero
// and fully dense) are written into the core's local buffer in its compute
// format; after `start` the 256 output words are collected with random
// backpressure on out_ready and compared with a triple-loop reference
// product.  The testbench also checks the output order, the `done` pulse and
// the number of cycles from start to the first output word against the
// core's timing model: mode 0: 16*(16+1+q)+2 cycles, q = 1 when row 15 of B has a nonzero (the last bus word leaves a queue entry to drain); mode 1: sum over rows of (nonzeros+2), plus 2.
module eie_core_tb;
  import aespa_pkg::*;
  import tb_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  lb_wr_t    lb_wr;
  logic      start, busy, done, out_valid, out_ready, mode;
  out_word_t out_word;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  eie_core dut (.clk, .rst_n, .lb_wr, .mode, .start, .busy, .done, .out_valid, .out_ready, .out_word);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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

  task automatic load(input img_t ia, input img_t ib, input logic [5:0] mask);
    for (int r = 0; r < 6; r++)
      if (mask[r])
        for (int i = 0; i < int'(region_words(r)); i++) begin
          @(posedge clk);
          lb_wr <= '{en: 1'b1, region: lb_region_e'(r), idx: idx_t'(i),
                     data: (r < 3) ? ia[(r%3)*REG_WORDS+i] : ib[(r%3)*REG_WORDS+i]};
        end
    @(posedge clk);
    lb_wr <= '0;
  endtask

  task automatic run_tile(input mat_t a, input mat_t b, input int exp_cycles, input string tag);
    mat_t ref_o;
    int   cyc, got;
    bit   seen_done;
    matmul(a, b, ref_o);
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!out_valid) begin
      @(posedge clk);
      cyc++;
    end
    check(cyc == exp_cycles, $sformatf("%s: %0d cycles to first output, expected %0d", tag, cyc, exp_cycles));
    got = 0;
    seen_done = 0;
    while (got < REG_WORDS) begin
      out_ready <= ($urandom_range(3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(int'(out_word.idx) == got, $sformatf("%s: index %0d, expected %0d", tag, out_word.idx, got));
        check(out_word.data == ref_o[got], $sformatf("%s: O[%0d] = %0d, expected %0d", tag, got, out_word.data, ref_o[got]));
        got++;
      end
    end
    out_ready <= 1'b0;
    @(posedge clk);
    seen_done = done;
    check(seen_done && !busy, $sformatf("%s: done pulse after last word", tag));
  endtask

  function automatic int model_mode0(input mat_t b);
    int q;
    q = 0;
    for (int n = 0; n < TILE; n++) if (b[15*TILE+n] != 0) q = 1;
    return 16 * (17 + q) + 2;
  endfunction
  function automatic int model_mode1(input mat_t a);
    int c;
    c = 0;
    for (int m = 0; m < TILE; m++) c += nnz_fibre(a, 1'b1, m) + 2;
    return c + 2;
  endfunction

  initial begin
    mat_t a, b;
    img_t ia, ib;
    int dens [6][2] = '{'{100, 100}, '{30, 40}, '{10, 10}, '{0, 50}, '{60, 0}, '{5, 80}};
    lb_wr = '0;
    start = 1'b0;
    out_ready = 1'b0;
    mode = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 12; t++) begin
      int da, db;
      da = (t < 6) ? dens[t][0] : int'($urandom_range(100));
      db = (t < 6) ? dens[t][1] : int'($urandom_range(100));
      gen_mat(a, da);
      gen_mat(b, db);
      mode = t[0];
      if (!mode) begin
        dense_img(a, ia);
        comp_img(b, 1'b0, ib);
        load(ia, ib, 6'b111_001);
        run_tile(a, b, model_mode0(b), $sformatf("trial %0d mode 0", t));
      end else begin
        comp_img(a, 1'b1, ia);
        dense_img(b, ib);
        load(ia, ib, 6'b001_111);
        run_tile(a, b, model_mode1(a), $sformatf("trial %0d mode 1", t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
