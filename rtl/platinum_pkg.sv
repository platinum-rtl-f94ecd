// platinum_pkg -- constants and types shared by the Platinum LUT-based
// low-bit-weight GEMM accelerator.
//
// The sizes are the ones of the published configuration: 52 processing
// elements (PPEs), 8 input columns per LUT entry, 128-entry LUTs of 8-bit
// values, a 1080 x 520 x 32 (m x k x n) tile, chunk size 5 for ternary
// weights and 7 for the bit-serial (binary LUT) mode. The 32-bit accumulator
// width and the bit layout of a build-path entry are this design's choices.
package platinum_pkg;

  localparam int unsigned L_PPE      = 52;   // number of PPEs
  localparam int unsigned NCOLS      = 8;    // input columns per LUT entry
  localparam int unsigned LUT_DEPTH  = 128;  // LUT entries per PPE
  localparam int unsigned LUT_AW     = 7;    // LUT index width
  localparam int unsigned LUT_W      = 8;    // bits per LUT value
  localparam int unsigned ACT_W      = 8;    // activation width
  localparam int unsigned OUT_W      = 32;   // output accumulator width
  localparam int unsigned C_TER      = 5;    // chunk size, ternary path
  localparam int unsigned C_BS       = 7;    // chunk size, bit-serial path
  localparam int unsigned M_TILE     = 1080; // rows of a weight tile
  localparam int unsigned K_TILE     = 520;  // reduction length of a tile
  localparam int unsigned N_TILE     = 32;   // input columns of a tile
  localparam int unsigned PATH_DEPTH = 128;  // entries per build path
  localparam int unsigned PATH_AW    = 7;
  localparam int unsigned J_W        = 3;    // input index inside a chunk

  // Derived tile geometry.
  localparam int unsigned PAIRS_MAX = M_TILE / 2;                // row pairs
  localparam int unsigned GROUPS    = N_TILE / NCOLS;            // column groups
  localparam int unsigned IN_ROWS   = K_TILE / L_PPE;            // rows per input bank
  localparam int unsigned WB_DEPTH  = PAIRS_MAX * (K_TILE / (L_PPE * C_TER));
  localparam int unsigned PAIR_W    = $clog2(PAIRS_MAX);
  localparam int unsigned GRP_W     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned SHIFT_W   = 3;                         // up to 8 bit planes

  // Width of the PPE adder: a sign-flipped LUT value needs LUT_W+1 bits,
  // the sum of two of them LUT_W+2.
  localparam int unsigned ADD_W = LUT_W + 2;

  // Which of the two stored build paths is used (path switching).
  typedef enum logic {
    MODE_BITSERIAL = 1'b0,
    MODE_TERNARY   = 1'b1
  } path_mode_e;

  // One build-path step: lut[dst] = lut[src] +/- a[j]; finish ends the path.
  typedef struct packed {
    logic              finish;
    logic [LUT_AW-1:0] dst;
    logic [LUT_AW-1:0] src;
    logic [J_W-1:0]    j;
    logic              sign;
  } path_entry_t;

  // One encoded weight byte: bit 7 flips the looked-up value, bits 6:0 index.
  typedef struct packed {
    logic              sign;
    logic [LUT_AW-1:0] idx;
  } wcode_t;

  // Travels with a row pair through the reduction pipeline.
  typedef struct packed {
    logic [PAIR_W-1:0]  pair;   // rows 2*pair and 2*pair+1
    logic [GRP_W-1:0]   grp;    // column group
    logic [SHIFT_W-1:0] shift;  // bit-plane weight 2^shift
    logic               first;  // overwrite instead of accumulate
  } agg_tag_t;

  // Operation set up by the host for one tile.
  typedef struct packed {
    path_mode_e         mode;
    logic [PAIR_W:0]    n_pairs;   // rows / 2, at least 1
    logic [3:0]         n_rounds;  // k-rounds of L*c inputs, at least 1
    logic [GRP_W:0]     n_groups;  // column groups of NCOLS, at least 1
    logic [SHIFT_W:0]   n_planes;  // bit planes (1 for ternary), 1..8
  } cfg_t;

endpackage
