// vecom_pkg: constants and types shared by the VECOM tile.
//
// A VECOM tile stores signed 8-bit weights in 2-bit multi-level ReRAM cells
// and computes matrix-vector products bit-serially on 8-bit activations.
// Each weight is split over five crossbars, one per bit slice: [7:6] (MSB),
// [5:4] "Origin", [5:4] "Redun", [3:2] and [1:0].  The Origin cell counts
// three times in shift-and-add, the Redun cell once, so the [5:4] slice v is
// stored as v = 3*origin + redun with origin in {0,1} and redun in {0,1,2}.
// Weights are stored with a bias of 64 (not 128) and a biased value below
// zero is clipped to zero.  The numbers below are the paper's (128x128
// crossbar, 2 bits per cell, 8-bit weights and activations, bias 64); the
// conductance units used by the behavioural crossbar are this design's own.
package vecom_pkg;

  // Crossbar geometry and precisions
  localparam int unsigned XBAR_ROWS   = 128;  // wordlines per crossbar
  localparam int unsigned XBAR_COLS   = 128;  // weight bitlines per crossbar
  localparam int unsigned CELL_BITS   = 2;    // MLC: 2 bits per cell
  localparam int unsigned WEIGHT_BITS = 8;    // signed weight precision
  localparam int unsigned ACT_BITS    = 8;    // unsigned activation precision
  localparam int unsigned NUM_ARRAYS  = 5;    // bit-slice crossbars per tile

  // VECOM bias control: bias 64 instead of the usual 128
  localparam int VECOM_BIAS = 64;

  // Shift-and-add weight of each bit-slice array (Origin = 3 x 16)
  localparam int SLICE_WEIGHT [NUM_ARRAYS] = '{64, 48, 16, 4, 1};

  // Bit-slice array indices
  typedef enum logic [2:0] {
    ARR_MSB   = 3'd0,   // bits [7:6] of the biased weight
    ARR_ORIG  = 3'd1,   // [5:4] Origin, level 0 or 1, weighted x3
    ARR_REDUN = 3'd2,   // [5:4] Redun, level 0, 1 or 2
    ARR_B32   = 3'd3,   // bits [3:2]
    ARR_B10   = 3'd4    // bits [1:0]
  } array_e;

  typedef logic [CELL_BITS-1:0] level_t;

  // The five MLC levels one weight becomes after VECOM encoding
  typedef struct packed {
    level_t msb;
    level_t orig;
    level_t redun;
    level_t b32;
    level_t b10;
  } vecom_levels_t;

  // Extra columns appended to each crossbar after the weight columns
  localparam int unsigned REF_COL  = XBAR_COLS;      // HRS reference column
  localparam int unsigned BIAS_COL = XBAR_COLS + 1;  // all-01 bias-count column

endpackage
