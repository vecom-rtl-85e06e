// reram_crossbar: behavioural model of one MLC ReRAM crossbar (analog part).
//
// This is a behavioural model of an analog array, not synthesizable logic in
// the sense of the real part: each cell is held as an integer conductance
// and each bitline current is the sum of the conductances of the cells on
// activated wordlines (Ohm's and Kirchhoff's laws with a unit read voltage).
// Rows x COLS weight columns are followed by an extra reference column
// (index COLS) that is programmed to the HRS level and measures N*I00 for
// offset compensation, and, when HAS_BIAS_COL is set, a bias-count column
// (index COLS+1) whose cells hold level 01 and so count the ones in the
// input slice.
//
// Programming: on a clock edge with wr_en, cell (wr_row, wr_col) takes the
// conductance wr_g + wr_var, clamped to [0, 2^G_BITS-1].  wr_g is the target
// that write-and-verify aims at; wr_var is the residual device deviation the
// environment supplies (zero for an ideal cell), standing in for the
// log-normal programming variation G = G0*exp(theta) the paper models.
// Reading: i_bl, i_ref and i_bias follow wl combinationally (the analog
// settling is not modelled).  Cells are non-volatile and not reset.
//
// Geometry 128x128 and one reference column per array follow the paper;
// integer conductance units and the variation port are this model's choice.
module reram_crossbar #(
  parameter int unsigned ROWS         = 128,
  parameter int unsigned COLS         = 128,
  parameter int unsigned G_BITS       = 10,
  parameter int unsigned I_BITS       = G_BITS + $clog2(ROWS),
  parameter bit          HAS_BIAS_COL = 1'b0
) (
  input  logic                         clk,
  // programming port
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic [$clog2(COLS+2)-1:0]    wr_col,
  input  logic [G_BITS-1:0]            wr_g,
  input  logic signed [G_BITS:0]       wr_var,
  // read port
  input  logic [ROWS-1:0]              wl,
  output logic [COLS-1:0][I_BITS-1:0]  i_bl,
  output logic [I_BITS-1:0]            i_ref,
  output logic [I_BITS-1:0]            i_bias
);

  localparam int unsigned NCOL = HAS_BIAS_COL ? COLS + 2 : COLS + 1;

  // programming with clamped device deviation
  logic signed [G_BITS+1:0] g_new;
  logic [G_BITS-1:0]        g_clamped;
  always_comb begin
    g_new = $signed({2'b00, wr_g}) + (G_BITS+2)'(wr_var);
    if (g_new < 0)
      g_clamped = '0;
    else if (g_new > $signed((G_BITS+2)'({G_BITS{1'b1}})))
      g_clamped = '1;
    else
      g_clamped = g_new[G_BITS-1:0];
  end

  // one column of cells and its bitline current per generate iteration
  logic [I_BITS-1:0] i_col [NCOL];

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    logic [G_BITS-1:0] g [ROWS];

    always_ff @(posedge clk) begin
      if (wr_en && (32'(wr_col) == c))
        g[wr_row] <= g_clamped;
    end

    always_comb begin
      i_col[c] = '0;
      for (int r = 0; r < ROWS; r++)
        if (wl[r]) i_col[c] = i_col[c] + I_BITS'(g[r]);
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) i_bl[c] = i_col[c];
    i_ref  = i_col[COLS];
    i_bias = HAS_BIAS_COL ? i_col[NCOL-1] : '0;
  end

endmodule
