// shift_add: shift-and-add unit of a VECOM tile.
//
// For every output column j and every (input bit, wordline group) step the
// five bit-slice ADC codes are combined into the partial dot product of the
// biased weights,
//     p_j = 64*c_msb + 48*c_orig + 16*c_redun + 4*c_b32 + c_b10,
// where the Origin [5:4] code counts 3 x 16 because Origin holds the [5:4]
// value in units of three.  The bias-count column code n (the number of ones
// among the activated input bits) removes the bias 64 of the stored weights:
//     s_j = p_j - 64*n.
// s_j is shifted left by the input bit position and added to acc_j.  After
// all bits and groups acc_j = sum_i x_i * w'_i with w'_i the clipped weight.
//
// Timing: clear zeroes all accumulators on a clock edge; valid adds one step
// on a clock edge using codes and bit_pos of that cycle.  Synchronous
// active-high reset.  The slice weights, the Origin x3 and the bias
// subtraction follow the paper; the 32-bit accumulators are this design's.
module shift_add
  import vecom_pkg::*;
#(
  parameter int unsigned COLS     = 128,
  parameter int unsigned RES_MAX  = 9,
  parameter int unsigned ACC_BITS = 32
) (
  input  logic                                        clk,
  input  logic                                        rst,
  input  logic                                        clear,
  input  logic                                        valid,
  input  logic [$clog2(ACT_BITS)-1:0]                 bit_pos,
  input  logic [NUM_ARRAYS-1:0][COLS-1:0][RES_MAX-1:0] codes,
  input  logic [RES_MAX-1:0]                          bias_code,
  output logic signed [ACC_BITS-1:0]                 acc [COLS]
);

  logic signed [ACC_BITS-1:0] step [COLS];

  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      step[j] = -$signed(ACC_BITS'(VECOM_BIAS) * ACC_BITS'(bias_code));
      for (int a = 0; a < NUM_ARRAYS; a++)
        step[j] = step[j] + $signed(ACC_BITS'(SLICE_WEIGHT[a]) * ACC_BITS'(codes[a][j]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      for (int j = 0; j < COLS; j++) acc[j] <= '0;
    end else if (valid) begin
      for (int j = 0; j < COLS; j++)
        acc[j] <= acc[j] + (step[j] <<< bit_pos);
    end
  end

endmodule
