// com_target_map: VECOM conductance offset mapping (COM).
//
// A bitline accumulates N*I00 of offset current from its activated cells as
// well as the wanted signal.  Subtracting the current of an all-HRS reference
// column removes N*I00 exactly only if every non-HRS level also carries one
// G00 on top of its ideal conductance.  This block therefore gives the
// write-and-verify programmer the target conductance
//     G'(level) = level * G_LSB + G_HRS
// i.e. G00 = G_HRS for level 00 and G + G00 for levels 01, 10, 11.
//
// Conductance is expressed in integer units; G_LSB is the conductance step of
// one level and G_HRS the HRS conductance G00.  With the defaults the highest
// level has G'11/G00 = (3*64+32)/32 = 7, the lowest R-ratio the paper reports
// VECOM to tolerate.  The unit scale is this design's choice; the paper gives
// only the relation G' = G + G00.  Combinational; LEVEL_BITS may be raised for
// TLC/QLC cells, which the scheme supports unchanged.
module com_target_map #(
  parameter int unsigned LEVEL_BITS = 2,
  parameter int unsigned G_BITS     = 10,
  parameter int unsigned G_LSB      = 64,
  parameter int unsigned G_HRS      = 32
) (
  input  logic [LEVEL_BITS-1:0] level,
  output logic [G_BITS-1:0]     g_target
);

  always_comb begin
    g_target = G_BITS'(level) * G_BITS'(G_LSB) + G_BITS'(G_HRS);
  end

  initial begin
    assert (((2**LEVEL_BITS) - 1) * G_LSB + G_HRS < 2**G_BITS)
      else $error("com_target_map: G_BITS too narrow for the top level");
  end

endmodule
