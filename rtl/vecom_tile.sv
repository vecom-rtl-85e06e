// vecom_tile: one VECOM ReRAM processing tile (top level).
//
// The tile multiplies a vector of ROWS unsigned 8-bit activations by a
// ROWS x COLS matrix of signed 8-bit weights held in 2-bit MLC ReRAM cells,
// and is built to keep that product correct while many wordlines are on at
// once despite cell variation and HRS offset current:
//  * VECOM encoding (weight_programmer / vecom_encoder): weights are stored
//    with bias 64 and the [5:4] slice is split into Origin (x3) and Redun
//    cells, so the slices that matter most sit on low, low-variation levels.
//    Five crossbars, one per slice: MSB, Origin, Redun, [3:2], [1:0].
//  * Conductance offset mapping (com_target_map): every non-HRS level is
//    programmed one G00 higher, so subtracting an all-HRS reference column
//    removes the offset current exactly for multi-level cells.
//  * Bit-serial evaluation (mac_controller, wl_driver): each input bit is
//    applied to NAW = 2**naw_log2 wordlines at a time; column SAR ADCs
//    (sar_comparator + sar_adc_logic) resolve log2(NAW)+2 bits of the
//    offset-compensated bitline current; shift_add weights the slices
//    (64, 48, 16, 4, 1), removes the bias with the MSB array's bias-count
//    column and accumulates.
// y[j] = sum_i x[i] * max(w[i][j], -64) when the cells are ideal.
//
// Interface:
//  prog_*   write one weight (prog_col < COLS), the reference column
//           (prog_col = COLS) or the bias column (prog_col = COLS+1) of row
//           prog_row; prog_var is the per-array device deviation of the cell
//           written (model input, zero for ideal cells).  One per clock.
//  x_*      write one activation of the input buffer per clock.
//  start    begin a multiplication with NAW = 2**naw_log2 (0..log2(ROWS));
//           busy until done pulses; y is valid from done to the next start.
// Timing: a multiplication takes ACT_BITS*(ROWS/NAW)*(log2(NAW)+4) cycles
// from the start edge to done.  Synchronous active-high reset.
// The crossbar and the ADC front end are behavioural models of analog parts;
// everything else is synthesizable.
module vecom_tile
  import vecom_pkg::*;
#(
  parameter int unsigned ROWS   = XBAR_ROWS,
  parameter int unsigned COLS   = XBAR_COLS,
  parameter int unsigned G_BITS = 10,
  parameter int unsigned G_LSB  = 64,
  parameter int unsigned G_HRS  = 32,
  localparam int unsigned LW      = $clog2($clog2(ROWS)+1),
  localparam int unsigned RES_MAX = $clog2(ROWS) + 2,
  localparam int unsigned I_BITS  = G_BITS + $clog2(ROWS),
  localparam int unsigned NCODE   = NUM_ARRAYS * COLS + 1
) (
  input  logic                                   clk,
  input  logic                                   rst,
  // weight programming
  input  logic                                   prog_valid,
  input  logic [$clog2(ROWS)-1:0]                prog_row,
  input  logic [$clog2(COLS+2)-1:0]              prog_col,
  input  logic signed [WEIGHT_BITS-1:0]          prog_w,
  input  logic signed [NUM_ARRAYS-1:0][G_BITS:0] prog_var,
  output logic [31:0]                            clipped_count,
  // activation buffer
  input  logic                                   x_we,
  input  logic [$clog2(ROWS)-1:0]                x_addr,
  input  logic [ACT_BITS-1:0]                    x_data,
  // multiplication
  input  logic                                   start,
  input  logic [LW-1:0]                          naw_log2,
  output logic                                   busy,
  output logic                                   done,
  output logic signed [31:0]                     y [COLS]
);

  // ---------------- programming path ----------------
  logic [NUM_ARRAYS-1:0]                  wr_en;
  logic [$clog2(ROWS)-1:0]                wr_row;
  logic [$clog2(COLS+2)-1:0]              wr_col;
  logic [NUM_ARRAYS-1:0][G_BITS-1:0]      wr_g;
  logic signed [NUM_ARRAYS-1:0][G_BITS:0] wr_var;

  weight_programmer #(
    .ROWS (ROWS), .COLS (COLS), .G_BITS (G_BITS), .G_LSB (G_LSB), .G_HRS (G_HRS)
  ) u_prog (
    .clk, .rst,
    .prog_valid, .prog_row, .prog_col, .prog_w, .prog_var,
    .wr_en, .wr_row, .wr_col, .wr_g, .wr_var,
    .clipped_count
  );

  // ---------------- control ----------------
  logic [$clog2(ACT_BITS)-1:0]  bit_sel;
  logic [$clog2(ROWS)-1:0]      group;
  logic [LW-1:0]                naw_q;
  logic                         adc_start, adc_done;
  logic [$clog2(RES_MAX+1)-1:0] adc_res;
  logic                         sa_clear, sa_valid;

  mac_controller #(.ROWS (ROWS), .ACT_BITS (ACT_BITS)) u_ctrl (
    .clk, .rst, .start, .naw_log2,
    .bit_sel, .group, .naw_log2_q (naw_q),
    .adc_start, .adc_res, .adc_done,
    .sa_clear, .sa_valid,
    .busy, .done
  );

  logic [ROWS-1:0] wl;

  wl_driver #(.ROWS (ROWS), .ACT_BITS (ACT_BITS)) u_wl (
    .clk, .x_we, .x_addr, .x_data,
    .bit_sel, .group, .naw_log2 (naw_q),
    .wl
  );

  // ---------------- crossbars and ADC front ends ----------------
  logic [NCODE-1:0]              cmp;
  logic [NCODE-1:0][RES_MAX-1:0] trial, code;
  logic [I_BITS-1:0]             i_bias_msb;
  logic [I_BITS-1:0]             i_ref_msb;

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_arr
    logic [COLS-1:0][I_BITS-1:0]    i_bl;
    logic [I_BITS-1:0]              i_ref, i_bias;
    logic [COLS-1:0][RES_MAX-1:0]   trial_a;
    logic [COLS-1:0]                cmp_a;

    reram_crossbar #(
      .ROWS (ROWS), .COLS (COLS), .G_BITS (G_BITS), .I_BITS (I_BITS),
      .HAS_BIAS_COL (a == ARR_MSB)
    ) u_xbar (
      .clk,
      .wr_en (wr_en[a]), .wr_row, .wr_col, .wr_g (wr_g[a]), .wr_var (wr_var[a]),
      .wl, .i_bl, .i_ref, .i_bias
    );

    for (genvar j = 0; j < COLS; j++) begin : g_col
      assign trial_a[j]       = trial[a*COLS + j];
      assign cmp[a*COLS + j]  = cmp_a[j];
    end

    sar_comparator #(
      .N (COLS), .I_BITS (I_BITS), .RES_MAX (RES_MAX), .G_LSB (G_LSB)
    ) u_cmp (
      .i_in (i_bl), .i_ref, .trial (trial_a), .cmp (cmp_a)
    );

    if (a == ARR_MSB) begin : g_bias
      assign i_bias_msb = i_bias;
      assign i_ref_msb  = i_ref;
    end
  end

  // bias-count column of the MSB array, offset-compensated like the others
  sar_comparator #(
    .N (1), .I_BITS (I_BITS), .RES_MAX (RES_MAX), .G_LSB (G_LSB)
  ) u_cmp_bias (
    .i_in (i_bias_msb), .i_ref (i_ref_msb),
    .trial (trial[NCODE-1]), .cmp (cmp[NCODE-1])
  );

  sar_adc_logic #(.N (NCODE), .RES_MAX (RES_MAX)) u_sar (
    .clk, .rst,
    .start (adc_start), .res (adc_res), .cmp,
    .trial, .code, .busy (), .done (adc_done)
  );

  // ---------------- shift and add ----------------
  logic [NUM_ARRAYS-1:0][COLS-1:0][RES_MAX-1:0] codes;
  always_comb begin
    for (int a = 0; a < NUM_ARRAYS; a++)
      for (int j = 0; j < COLS; j++)
        codes[a][j] = code[a*COLS + j];
  end

  shift_add #(.COLS (COLS), .RES_MAX (RES_MAX), .ACC_BITS (32)) u_sa (
    .clk, .rst,
    .clear (sa_clear), .valid (sa_valid), .bit_pos (bit_sel),
    .codes, .bias_code (code[NCODE-1]),
    .acc (y)
  );

endmodule
