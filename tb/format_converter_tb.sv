// format_converter_tb: self-checking testbench for the U_M C_K -> U_K C_M converter.
//
// Random 16x16 tiles (densities from empty to full, with empty rows) are sent
// row by row as compressed-fibre streams with random gaps in in_valid.  The
// writes are collected into a memory model and compared with the column-
// compressed image (fibre = column, coordinates = row ids, sorted) built by
// the reference functions, at a random base address.  Also checks the number
// of writes (2 per nonzero plus 16 counts), that nothing is written outside
// the image, and the tile_done pulse.
module format_converter_tb;
  import aespa_pkg::*;
  import tb_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid, in_ready, wr_valid, tile_done, idle;
  fiber_item_t in_item;
  addr_t       base;
  fill_wr_t    wr;
  int checks = 0, failures = 0;
  data_t mem [int];
  int nwr, ndone;

  always #5 clk = ~clk;

  format_converter dut (.*);

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
    if (wr_valid) begin
      mem[int'(wr.addr)] = wr.data;
      nwr++;
    end
    if (tile_done) ndone++;
  end

  initial begin
    mat_t x;
    img_t img;
    fstream_t q;
    in_valid = 0; in_item = '0; base = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 24; t++) begin
      int b, dens, nnz, words;
      dens = (t % 6 == 0) ? 0 : (t % 6 == 1) ? 100 : int'($urandom_range(60));
      gen_mat(x, dens);
      b = int'($urandom_range(5000));
      mem.delete();
      nwr = 0; ndone = 0;
      fibre_stream(x, 1'b1, q);
      @(posedge clk);
      base   <= addr_t'(b);
      while (q.size() > 0) begin
        if ($urandom_range(3) == 0) begin
          in_valid <= 0;
          @(posedge clk);
        end else begin
          in_valid <= 1;
          in_item  <= q[0];
          do @(negedge clk); while (!in_ready);
          @(posedge clk);
          void'(q.pop_front());
        end
      end
      in_valid <= 0;
      @(posedge clk);
      while (!idle) @(posedge clk);
      repeat (2) @(posedge clk);
      nnz = 0;
      for (int i = 0; i < TILE*TILE; i++) if (x[i] != 0) nnz++;
      comp_img(x, 1'b0, img);
      words = 2 * nnz + TILE;
      check(nwr == words, $sformatf("tile %0d: %0d writes, expected %0d", t, nwr, words));
      check(ndone == 1 && idle, $sformatf("tile %0d: done pulses %0d", t, ndone));
      for (int i = 0; i < 3*REG_WORDS; i++) begin
        bit used;
        used = (i >= 2*REG_WORDS) ? (i < 2*REG_WORDS + TILE)
             : ((i % REG_WORDS) % TILE < nnz_fibre(x, 1'b0, (i % REG_WORDS) / TILE));
        if (used) check(mem.exists(b + i) && mem[b + i] == img[i],
                        $sformatf("tile %0d: word %0d = %0d expected %0d", t, i,
                                  mem.exists(b + i) ? mem[b + i] : -999, img[i]));
        else check(!mem.exists(b + i), $sformatf("tile %0d: stray write at %0d", t, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
