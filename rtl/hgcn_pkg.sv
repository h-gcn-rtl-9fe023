// hgcn_pkg: types and constants shared by the H-GCN accelerator blocks.
//
// Every stream in the design carries one memory word of LANES elements; LANES = 8
// follows the 8-wide vector reads (window_read_v8) of the paper's AIE kernel.
// Elements are 32-bit like the paper's single-precision data, but this RTL computes
// on 32-bit two's-complement integers (products and sums wrap modulo 2^32) instead
// of IEEE floating point, which is a choice of this design.
// Tile sizes (64x64 for A*B, 32x32 for X*W), the 4+4 rows of PEs, 50 columns and the
// hidden dimension 128 are the paper's numbers.
package hgcn_pkg;

  localparam int unsigned LANES   = 8;    // elements per memory/stream word
  localparam int unsigned DATA_W  = 32;   // element width
  localparam int unsigned ADDR_W  = 32;   // word address width of the memory channel

  localparam int unsigned TILE_D  = 32;   // X*W tile (dense TPE)
  localparam int unsigned TILE_S  = 64;   // A*B tile (STPE)
  localparam int unsigned N_ROWS  = 4;    // PE rows per array (hidden = N_ROWS*TILE_D)
  localparam int unsigned N_COLS  = 50;   // PE columns

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic [LANES-1:0][DATA_W-1:0] word_t;

  // Header word of an A tile (lane 0) sent to an STPE column.
  typedef enum logic [1:0] {
    TILE_SKIP   = 2'd0,   // tile handled by the PL SpMM or empty: no AIE work
    TILE_SPARSE = 2'd1,   // grouped, padded CSR entries (col,val pairs)
    TILE_DENSE  = 2'd2    // dense row-major values
  } tile_mode_e;

  // Per-layer command from the platform controller.
  typedef struct packed {
    logic [15:0]       kx;          // number of 32-wide feature tiles of X (F/32)
    logic              act_en;      // apply the activation to the layer output
    logic [ADDR_W-1:0] x_base;      // X, row-major, kx*4 words per row
    logic [ADDR_W-1:0] w_base;      // W, row-major, hidden/8 words per row
    logic [ADDR_W-1:0] b_base;      // B = X*W, written by the dense array
    logic [ADDR_W-1:0] a_ptr_base;  // A tile pointer table, entry kt*COLS+c
    logic [ADDR_W-1:0] pl_ptr_base; // PL entry list pointer table, entry kt
    logic [ADDR_W-1:0] out_base;    // layer output, same layout as B
  } layer_cfg_t;

  function automatic elem_t lane(input word_t w, input int unsigned l);
    return elem_t'(w[l]);
  endfunction

  // Element-wise w + v*b (wrapping arithmetic)
  function automatic word_t mac_word(input word_t acc, input elem_t v, input word_t b);
    word_t r;
    for (int l = 0; l < LANES; l++) r[l] = DATA_W'(elem_t'(acc[l]) + v * elem_t'(b[l]));
    return r;
  endfunction

endpackage
