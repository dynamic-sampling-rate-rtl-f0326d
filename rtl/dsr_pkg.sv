// dsr_pkg: types and constants shared by the Dynamic Sampling Rate (DSR) blocks.
//
// A screen tile is 16x16 pixels. Each tile carries a sampling-rate state; the
// state counts how many times the sampling grid has been halved in X and Y:
// level 0 samples every pixel (1x), level 4 samples the tile once (1/256x).
// The five states and the tile size follow the paper; the numeric encoding
// and all fixed-point formats below are this design's own choices.
//
// Fixed point:
//   luminance / pixel input : 8-bit unsigned
//   DCT coefficients        : COEF_W-bit signed, COEF_FRAC fraction bits
//   DCT kernel entries      : KERNEL_W-bit signed, KERNEL_FRAC fraction bits
// With the orthonormal 16-point DCT the largest coefficient of an 8-bit tile is
// 256*255/16 = 4080 (the DC term), which needs 4080*4 = 16320 < 2^15 in the
// coefficient format, so no coefficient can saturate.
package dsr_pkg;

  localparam int unsigned TILE_DIM    = 16;  // pixels per tile side
  localparam int unsigned TILE_PIX    = TILE_DIM * TILE_DIM;
  localparam int unsigned NUM_UNITS   = 4;   // 1D DCT compute units
  localparam int unsigned IDX_W       = 4;   // log2(TILE_DIM)

  localparam int unsigned PIX_W       = 8;   // luminance bits
  localparam int unsigned COEF_W      = 16;
  localparam int unsigned COEF_FRAC   = 2;
  localparam int unsigned KERNEL_W    = 12;
  localparam int unsigned KERNEL_FRAC = 11;
  localparam int unsigned DIAG_W      = 5;   // diagonal index p+q, 0..30

  // Sampling-rate state of a tile (3 bits, five states).
  typedef enum logic [2:0] {
    SR_1X     = 3'd0,   // one sample per pixel
    SR_1_4X   = 3'd1,   // one sample per 2x2 pixels
    SR_1_16X  = 3'd2,   // one sample per 4x4 pixels
    SR_1_64X  = 3'd3,   // one sample per 8x8 pixels
    SR_1_256X = 3'd4    // one sample per tile
  } sr_level_e;

  // Outcome of one FSM evaluation.
  typedef enum logic [1:0] {
    DEC_MAINTAIN = 2'd0,
    DEC_REDUCE   = 2'd1,
    DEC_INCREASE = 2'd2,
    DEC_ALWAYS   = 2'd3    // forced 1/256x -> 1/64x
  } sr_decision_e;

  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic        [COEF_W-2:0]   mag_t;     // |coefficient|
  typedef logic signed [KERNEL_W-1:0] kern_t;
  typedef logic        [DIAG_W-1:0]   diag_t;

  // The <T,D> tuples of the FSM. Reduce tuples exist for levels 0..3, increase
  // tuples for levels 1..3 (stored at index level-1).
  typedef struct packed {
    mag_t  [3:0] t_reduce;
    diag_t [3:0] d_reduce;
    mag_t  [2:0] t_increase;
    diag_t [2:0] d_increase;
  } dsr_params_t;

  typedef struct packed {
    logic [7:0] a;
    logic [7:0] b;
    logic [7:0] g;
    logic [7:0] r;
  } rgba_t;

  typedef rgba_t [TILE_DIM-1:0] color_row_t;   // one 64-byte buffer line

  // Luminance used as the DCT input: Y = (77R + 150G + 29B + 128) >> 8.
  // Alpha does not take part. The sum is at most 255*256 + 128 < 2^16.
  function automatic logic [PIX_W-1:0] luma(input logic [7:0] r, input logic [7:0] g,
                                            input logic [7:0] b);
    logic [15:0] s;
    s = 16'd77 * r + 16'd150 * g + 16'd29 * b + 16'd128;
    return s[15:8];
  endfunction

endpackage
