// wl_driver: input activation buffer and bit-serial wordline selection.
//
// The tile feeds activations one bit at a time through 1-bit DACs, and only
// NAW (number of activated wordlines) rows may be on at once, because the
// variation of many summed cells would blur the ADC decision.  This block
// holds the ROWS activations and raises wordline r when
//     r is in the active group  ((r >> naw_log2) == group)   and
//     bit bit_sel of activation r is 1.
// NAW = 2**naw_log2, so the ROWS rows form ROWS/NAW groups.
//
// Interface: x_we/x_addr/x_data write one activation per clock (synchronous,
// no reset: the buffer is always written before use).  bit_sel, group and
// naw_log2 select the wordlines combinationally; wl goes to the crossbars.
//
// Bit-serial input through 1-bit DACs and limiting the number of activated
// wordlines follow the paper; unsigned activations, contiguous row groups
// and a power-of-two NAW are this design's choices.
module wl_driver #(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned ACT_BITS = 8
) (
  input  logic                          clk,
  input  logic                          x_we,
  input  logic [$clog2(ROWS)-1:0]       x_addr,
  input  logic [ACT_BITS-1:0]           x_data,
  input  logic [$clog2(ACT_BITS)-1:0]   bit_sel,
  input  logic [$clog2(ROWS)-1:0]       group,
  input  logic [$clog2($clog2(ROWS)+1)-1:0] naw_log2,
  output logic [ROWS-1:0]               wl
);

  localparam int unsigned AW = $clog2(ROWS);

  logic [ACT_BITS-1:0] x [ROWS];

  always_ff @(posedge clk) begin
    if (x_we) x[x_addr] <= x_data;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      wl[r] = x[r][bit_sel] && ((AW'(r) >> naw_log2) == group);
  end

  // Never more than NAW wordlines on
  assert property (@(posedge clk) $countones(wl) <= (1 << naw_log2));

endmodule
