// tb_pkg: reference models shared by the testbenches.
//
// Random 16x16 int32 matrices with a chosen density, a plain triple-loop
// matrix product as the golden model, and builders for the tile images the
// cores and the scratchpad hold (VAL at 0..255, CRD at 256..511, CNT at
// 512..527; fibre f's i-th nonzero at f*16+i).  Also the compressed-fibre
// stream of a matrix, as the memory side delivers it.
package tb_pkg;
  import aespa_pkg::*;

  typedef data_t mat_t [TILE*TILE];
  typedef data_t img_t [3*REG_WORDS];
  typedef fiber_item_t fstream_t [$];

  // Random matrix: each element nonzero with probability dens_pct %, values
  // in -64..63 excluding 0.
  function automatic void gen_mat(output mat_t x, input int dens_pct);
    for (int i = 0; i < TILE*TILE; i++) begin
      if (int'($urandom_range(99)) < dens_pct) begin
        int v;
        v = int'($urandom_range(126)) - 63;
        if (v == 0) v = 64;
        x[i] = data_t'(v);
      end else x[i] = '0;
    end
  endfunction

  function automatic void matmul(input mat_t a, input mat_t b, output mat_t o);
    for (int m = 0; m < TILE; m++)
      for (int n = 0; n < TILE; n++) begin
        data_t s;
        s = '0;
        for (int k = 0; k < TILE; k++) s += a[m*TILE+k] * b[k*TILE+n];
        o[m*TILE+n] = s;
      end
  endfunction

  // Element of fibre f at position c: rows are fibres when by_row, else columns.
  function automatic data_t elem(input mat_t x, input bit by_row, input int f, input int c);
    return by_row ? x[f*TILE+c] : x[c*TILE+f];
  endfunction

  function automatic void dense_img(input mat_t x, output img_t img);
    for (int i = 0; i < 3*REG_WORDS; i++) img[i] = '0;
    for (int i = 0; i < TILE*TILE; i++) img[i] = x[i];
  endfunction

  function automatic void comp_img(input mat_t x, input bit by_row, output img_t img);
    for (int i = 0; i < 3*REG_WORDS; i++) img[i] = '0;
    for (int f = 0; f < TILE; f++) begin
      int n;
      n = 0;
      for (int c = 0; c < TILE; c++)
        if (elem(x, by_row, f, c) != 0) begin
          img[f*TILE+n]           = elem(x, by_row, f, c);
          img[REG_WORDS+f*TILE+n] = data_t'(c);
          n++;
        end
      img[2*REG_WORDS+f] = data_t'(n);
    end
  endfunction

  function automatic int nnz_fibre(input mat_t x, input bit by_row, input int f);
    int n;
    n = 0;
    for (int c = 0; c < TILE; c++) if (elem(x, by_row, f, c) != 0) n++;
    return n;
  endfunction

  // Compressed-fibre stream of x (fibres = rows when by_row).
  function automatic void fibre_stream(input mat_t x, input bit by_row, ref fstream_t q);
    q.delete();
    for (int f = 0; f < TILE; f++) begin
      int n, seen;
      n = nnz_fibre(x, by_row, f);
      seen = 0;
      if (n == 0) q.push_back('{val: '0, crd: '0, eof: 1'b1, nz: 1'b0});
      for (int c = 0; c < TILE; c++)
        if (elem(x, by_row, f, c) != 0) begin
          seen++;
          q.push_back('{val: elem(x, by_row, f, c), crd: crd_t'(c), eof: (seen == n), nz: 1'b1});
        end
    end
  endfunction
endpackage
