// sar_comparator: behavioural model of the analog front end of a bank of
// SAR ADCs (current subtraction, capacitive DAC and comparator).
//
// This is a behavioural model of analog circuitry.  For every column it
// subtracts the reference-column current i_ref (the N*I00 offset current of
// the activated HRS cells) from the bitline current, as the offset
// compensation of the tile requires, and compares the difference with the
// DAC level of the trial code the SAR logic presents:
//     cmp[c] = (i_in[c] - i_ref) >= trial[c]*G_LSB - G_LSB/2
// The half-step offset makes the finished conversion round to the nearest
// code.  One code step equals one level step G_LSB of one cell on one
// activated wordline.  Combinational.
//
// The subtraction of a reference-column current before conversion follows
// the paper; the DAC scaling and rounding threshold are this model's choice.
module sar_comparator #(
  parameter int unsigned N       = 129,
  parameter int unsigned I_BITS  = 17,
  parameter int unsigned RES_MAX = 9,
  parameter int unsigned G_LSB   = 64
) (
  input  logic [N-1:0][I_BITS-1:0]  i_in,
  input  logic [I_BITS-1:0]         i_ref,
  input  logic [N-1:0][RES_MAX-1:0] trial,
  output logic [N-1:0]              cmp
);

  localparam int unsigned W = I_BITS + 8;

  logic signed [W-1:0] diff, level;
  always_comb begin
    for (int c = 0; c < N; c++) begin
      diff   = $signed(W'(i_in[c])) - $signed(W'(i_ref));
      level  = $signed(W'(trial[c]) * W'(G_LSB)) - $signed(W'(G_LSB / 2));
      cmp[c] = (diff >= level);
    end
  end

endmodule
