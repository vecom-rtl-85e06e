// weight_programmer: maps host weight writes onto the five bit-slice
// crossbars of a VECOM tile.
//
// For a weight column (prog_col < COLS) the signed weight is VECOM-encoded
// (bias 64 with clipping, then the Origin/Redun split of [5:4]) and each of
// the five MLC levels is turned into a conductance-offset-mapped target
// G' = level*G_LSB + G00 for the cell at (prog_row, prog_col) of its array.
// prog_col = COLS programs the HRS reference column of all five arrays
// (level 00, target G00); prog_col = COLS+1 programs the bias-count column
// of the MSB array (level 01, target G_LSB + G00), the weight is then
// ignored.  prog_var carries the device deviation each written cell ends up
// with (zero for ideal cells) and is passed to the crossbar models.
//
// Timing: one write per clock; the crossbar write ports are registered, so a
// write reaches the arrays one cycle after prog_valid and lands in the cell
// on the edge after that.  clipped_count counts weight writes whose weight
// was clipped (w < -64), the statistic the paper tabulates per model.
// Synchronous active-high reset clears the write enables and the counter.
// The encoding and the target rule follow the paper; the command format,
// the bias column in the MSB array only and the counter are this design's.
module weight_programmer
  import vecom_pkg::*;
#(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned G_BITS = 10,
  parameter int unsigned G_LSB  = 64,
  parameter int unsigned G_HRS  = 32
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // host write command
  input  logic                                  prog_valid,
  input  logic [$clog2(ROWS)-1:0]               prog_row,
  input  logic [$clog2(COLS+2)-1:0]             prog_col,
  input  logic signed [WEIGHT_BITS-1:0]         prog_w,
  input  logic signed [NUM_ARRAYS-1:0][G_BITS:0] prog_var,
  // crossbar write ports, one per bit-slice array
  output logic [NUM_ARRAYS-1:0]                 wr_en,
  output logic [$clog2(ROWS)-1:0]               wr_row,
  output logic [$clog2(COLS+2)-1:0]             wr_col,
  output logic [NUM_ARRAYS-1:0][G_BITS-1:0]     wr_g,
  output logic signed [NUM_ARRAYS-1:0][G_BITS:0] wr_var,
  // statistics
  output logic [31:0]                           clipped_count
);

  vecom_levels_t enc_levels;
  logic          enc_clipped;

  vecom_encoder u_enc (
    .w       (prog_w),
    .levels  (enc_levels),
    .clipped (enc_clipped)
  );

  level_t                  lvl [NUM_ARRAYS];
  logic [NUM_ARRAYS-1:0]   en;
  logic [G_BITS-1:0]       tgt [NUM_ARRAYS];

  always_comb begin
    en = '0;
    for (int a = 0; a < NUM_ARRAYS; a++) lvl[a] = '0;
    if (32'(prog_col) < COLS) begin
      en = '1;
      lvl[ARR_MSB]   = enc_levels.msb;
      lvl[ARR_ORIG]  = enc_levels.orig;
      lvl[ARR_REDUN] = enc_levels.redun;
      lvl[ARR_B32]   = enc_levels.b32;
      lvl[ARR_B10]   = enc_levels.b10;
    end else if (32'(prog_col) == COLS) begin
      en = '1;                            // HRS reference column, level 00
    end else if (32'(prog_col) == COLS + 1) begin
      en[ARR_MSB]  = 1'b1;                // bias-count column, level 01
      lvl[ARR_MSB] = 2'b01;
    end
  end

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_map
    com_target_map #(
      .LEVEL_BITS (CELL_BITS),
      .G_BITS     (G_BITS),
      .G_LSB      (G_LSB),
      .G_HRS      (G_HRS)
    ) u_map (
      .level    (lvl[a]),
      .g_target (tgt[a])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_en         <= '0;
      wr_row        <= '0;
      wr_col        <= '0;
      wr_g          <= '0;
      wr_var        <= '0;
      clipped_count <= '0;
    end else begin
      wr_en  <= prog_valid ? en : '0;
      wr_row <= prog_row;
      wr_col <= prog_col;
      for (int a = 0; a < NUM_ARRAYS; a++) begin
        wr_g[a]   <= tgt[a];
        wr_var[a] <= prog_var[a];
      end
      if (prog_valid && (32'(prog_col) < COLS) && enc_clipped)
        clipped_count <= clipped_count + 1'b1;
    end
  end

endmodule
