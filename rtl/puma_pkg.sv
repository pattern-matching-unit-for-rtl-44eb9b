// puma_pkg: types and constants shared by the pattern-matching board.
//
// The board matches MR-fingerprinting voxels, each reduced to 8 complex SVD
// coefficients, against a bank of binned dictionary patterns held in
// Associative Memory (AM) chips, then refines the match with full-resolution
// dot products. The AM geometry (8 buses, 16-bit words, 4 mezzanines of 16
// chips), the 8 coefficients and the 15 bins per component follow the paper.
// The full-resolution component width, the address and parameter-index widths
// and the word format on the AM buses are this design's own choices.
package puma_pkg;

  // AM geometry
  localparam int unsigned N_BUS   = 8;    // input buses = words per column
  localparam int unsigned WORD_W  = 16;   // AM word width
  localparam int unsigned THR_W   = 6;    // threshold field, values 6..32

  // MRF data
  localparam int unsigned N_COEF  = 8;    // SVD coefficients kept per voxel
  localparam int unsigned N_COMP  = 2 * N_COEF; // real and imaginary parts
  localparam int unsigned COMP_W  = 16;   // full-resolution component width
  localparam int unsigned N_BINS  = 15;   // bins per component
  localparam int unsigned BIN_W   = 4;

  // Dictionary
  localparam int unsigned ADDR_W  = 25;   // entry address, 2^25 > 26e6 entries
  localparam int unsigned CNT_W   = 25;   // list length (the original dictionary is scanned as one list)
  localparam int unsigned PARAM_W = 18;   // tissue-parameter index, 2^18 > 171981
  localparam int unsigned VOX_W   = 24;   // voxel identifier, 2^24 > 200^3

  // Dot product: 16 products of COMP_W x COMP_W summed, then |.|^2
  localparam int unsigned ACC_W   = 2 * COMP_W + 4;
  localparam int unsigned SCORE_W = 2 * ACC_W + 1;

  typedef logic signed [COMP_W-1:0] comp_t;

  typedef struct packed {
    comp_t re;
    comp_t im;
  } cplx_t;

  typedef cplx_t [N_COEF-1:0]    cvec_t;
  typedef logic [WORD_W-1:0]     am_word_t;
  typedef am_word_t [N_BUS-1:0]  am_words_t;
  typedef logic [BIN_W-1:0]      bin_t;
  typedef bin_t [N_COMP-1:0]     bins_t;
  typedef logic [SCORE_W-1:0]    score_t;

  // Number of neighbouring columns that form one pattern.
  typedef enum logic [1:0] {
    GRP_1COL = 2'd0,   // 8 words
    GRP_2COL = 2'd1,   // 16 words (one MRF voxel: 8 complex coefficients)
    GRP_4COL = 2'd2    // 32 words
  } grp_mode_e;

  // One full-resolution dictionary entry as read from the dictionary memory.
  typedef struct packed {
    cvec_t               coef;
    logic [PARAM_W-1:0]  param;   // index of the (T1, T2) combination
  } dict_entry_t;

  // A voxel as delivered by the host.
  typedef struct packed {
    logic [VOX_W-1:0] id;
    cvec_t            coef;
  } voxel_t;

  // Reconstruction result of one voxel.
  typedef struct packed {
    logic [VOX_W-1:0]    id;
    logic [PARAM_W-1:0]  param;     // best entry's tissue-parameter index
    score_t              score;     // |<entry, voxel>|^2 of that entry
    logic                matched;   // 1: AM found patterns, 0: full-dictionary fallback
    logic [15:0]         n_patterns;// matched patterns read out for this voxel
    logic [CNT_W-1:0]    n_dots;    // dot products computed for this voxel
  } result_t;

  // AM word carrying component k with bin b: {k, b} in the low byte pair,
  // so that a word can only ever match the stored word of its own component.
  function automatic am_word_t am_word(input int unsigned k, input bin_t b);
    am_word_t w;
    w = '0;
    w[15:8] = 8'(k);
    w[BIN_W-1:0] = b;
    return w;
  endfunction

endpackage
