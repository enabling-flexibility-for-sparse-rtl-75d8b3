// aespa_pkg: types and constants shared by the heterogeneous sparse accelerator.
//
// The accelerator is built from small sub-accelerator cores, each with 16 int32
// PEs and a local buffer that holds one 16x16 tile per operand (A, B, O).
// Operands reach a core as a "tile image": three regions of 256 words for A
// (values, coordinates, per-fibre counts) and three for B.  Fibre f of a
// compressed operand keeps its i-th nonzero at region offset f*16+i and its
// nonzero count at CNT[f]; a dense operand uses only the VAL region, row-major.
// The same image layout is used in the global scratchpad, so a tile load is a
// plain word copy.  Tile size and PE count follow the paper; the image layout,
// the stream and task formats are this design's own choices.
package aespa_pkg;

  localparam int TILE     = 16;             // tile edge (paper: 16x16 tiles)
  localparam int NPE      = 16;             // PEs per core (paper: 16 int32 PEs)
  localparam int DATA_W   = 32;             // int32 datapath
  localparam int CRD_W    = $clog2(TILE);   // coordinate inside a tile
  localparam int IDX_W    = 2 * CRD_W;      // word index inside a tile region
  localparam int CNT_W    = CRD_W + 1;      // 0..16 nonzeros per fibre
  localparam int ADDR_W   = 21;             // word address inside one scratchpad bank
  localparam int N_CL     = 4;              // sub-accelerator clusters (and slices)
  localparam int SL_W     = $clog2(N_CL);
  localparam int REG_WORDS = TILE * TILE;   // words per image region

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [CRD_W-1:0]  crd_t;
  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [CNT_W-1:0]  cnt_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [SL_W-1:0]   slice_t;

  // Local-buffer regions; the region number times 256 is also the word offset
  // of the region inside a tile image (A image: 0..2, B image: 3..5 minus 3).
  typedef enum logic [2:0] {
    LB_A_VAL = 3'd0, LB_A_CRD = 3'd1, LB_A_CNT = 3'd2,
    LB_B_VAL = 3'd3, LB_B_CRD = 3'd4, LB_B_CNT = 3'd5
  } lb_region_e;

  typedef struct packed {
    logic       en;
    lb_region_e region;
    idx_t       idx;
    data_t      data;
  } lb_wr_t;

  // One word of a finished output tile, O[m][n] at idx = m*16+n.
  typedef struct packed {
    idx_t  idx;
    data_t data;
  } out_word_t;

  // One element of a compressed-fibre stream.  nz=0 marks an empty fibre
  // (it must also have eof=1).  Fibres arrive in order 0..15.
  typedef struct packed {
    data_t val;
    crd_t  crd;
    logic  eof;
    logic  nz;
  } fiber_item_t;

  // Write into the fill bank of a scratchpad slice.
  typedef struct packed {
    addr_t addr;
    data_t data;
  } fill_wr_t;

  typedef enum logic [1:0] {CL_TPU = 2'd0, CL_EIE = 2'd1, CL_EXT = 2'd2, CL_OSP = 2'd3} cluster_e;

  // Memory-side path of a fibre stream: decompress to dense, keep compressed
  // (decompressor bypass), or convert U_MC_K -> U_KC_M.
  typedef enum logic [1:0] {PATH_DECOMP = 2'd0, PATH_BYPASS = 2'd1, PATH_CONVERT = 2'd2} ingress_path_e;

  typedef struct packed {
    slice_t        slice;
    ingress_path_e path;
    addr_t         base;   // base of the operand image (3 regions) in the slice
    fiber_item_t   item;
  } hbm_item_t;

  // Kernel task: one tile product on one cluster.
  typedef struct packed {
    cluster_e   cluster;
    logic       mode;      // EIE-like: 0 = A dense/B compressed, 1 = A compressed/B dense
    logic [5:0] regions;   // image regions to copy into the local buffer
    slice_t     a_slice;
    addr_t      a_base;
    slice_t     b_slice;
    addr_t      b_base;
    slice_t     o_slice;
    addr_t      o_base;
    logic       o_accum;   // add into the output (merge of split-K partial outputs)
  } task_t;

  // Output write travelling over the NoC to a slice.
  typedef struct packed {
    addr_t addr;
    data_t data;
    logic  accum;
  } owr_t;

  function automatic int unsigned region_words(int unsigned r);
    return (r % 3 == 2) ? TILE : REG_WORDS;
  endfunction

endpackage
