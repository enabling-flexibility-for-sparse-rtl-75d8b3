// extensor_core_tb: self-checking testbench for extensor_core (ExTensor-like inner-product SpGEMM core).
//
// Random 16x16 int32 operand tiles at several densities (including all-zero
// and fully dense) are written into the core's local buffer in its compute
// format; after `start` the 256 output words are collected with random
// backpressure on out_ready and compared with a triple-loop reference
// product.  The testbench also checks the output order, the `done` pulse and
// the number of cycles from start to the first output word against the
// core's timing model: per row, the longest two-pointer merge over the 16 columns plus one cycle, plus 2.
module extensor_core_tb;
  import aespa_pkg::*;
  import tb_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  lb_wr_t    lb_wr;
  logic      start, busy, done, out_valid, out_ready;
  out_word_t out_word;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  extensor_core dut (.clk, .rst_n, .lb_wr, .start, .busy, .done, .out_valid, .out_ready, .out_word);

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

  // Steps of a two-pointer merge of row m of A with column n of B.
  function automatic int merge_steps(input mat_t a, input mat_t b, input int m, input int n);
    int ca[$], cb[$];
    int i, j, s;
    for (int k = 0; k < TILE; k++) begin
      if (a[m*TILE+k] != 0) ca.push_back(k);
      if (b[k*TILE+n] != 0) cb.push_back(k);
    end
    i = 0; j = 0; s = 0;
    while (i < ca.size() && j < cb.size()) begin
      if (ca[i] == cb[j]) begin i++; j++; end
      else if (ca[i] < cb[j]) i++;
      else j++;
      s++;
    end
    return s;
  endfunction
  function automatic int model(input mat_t a, input mat_t b);
    int c;
    c = 0;
    for (int m = 0; m < TILE; m++) begin
      int mx;
      mx = 0;
      for (int n = 0; n < TILE; n++) if (merge_steps(a, b, m, n) > mx) mx = merge_steps(a, b, m, n);
      c += mx + 1;
    end
    return c + 2;
  endfunction

  initial begin
    mat_t a, b;
    img_t ia, ib;
    int dens [6][2] = '{'{100, 100}, '{30, 40}, '{10, 10}, '{0, 50}, '{60, 0}, '{5, 80}};
    lb_wr = '0;
    start = 1'b0;
    out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 10; t++) begin
      int da, db;
      da = (t < 6) ? dens[t][0] : int'($urandom_range(100));
      db = (t < 6) ? dens[t][1] : int'($urandom_range(100));
      gen_mat(a, da);
      gen_mat(b, db);
      comp_img(a, 1'b1, ia);
      comp_img(b, 1'b0, ib);
      load(ia, ib, 6'b111_111);
      run_tile(a, b, model(a, b), $sformatf("trial %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
