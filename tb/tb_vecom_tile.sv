// tb_vecom_tile: end-to-end test of a reduced tile (16 rows, 8 columns).
// Programs random signed weights (including weights below -64, which VECOM
// clips, and weights whose biased [5:4] slice is 11, which use the Origin
// array), the HRS reference columns and the bias-count column, loads random
// activations and runs multiplications at every NAW from 1 to 16.  Each
// result is compared with sum_i x[i] * max(w[i][j], -64) computed here, and
// the cycle count with 8 * (ROWS/NAW) * (log2(NAW)+4).  A second pass
// reprograms every cell with a device deviation of -1..+1 conductance units
// and checks that offset compensation plus rounding still give exact
// results for NAW up to 8.  Counts how often each mechanism happened:
// clipping, Origin use, each NAW mode, a nonzero bias correction, a
// nonzero reference (offset) current, and runs with device deviation.
module tb_vecom_tile;
  import vecom_pkg::*;
  localparam int ROWS = 16, COLS = 8, GB = 10;
  localparam int LROWS = $clog2(ROWS);

  logic clk = 0, rst = 1;
  logic prog_valid = 0;
  logic [LROWS-1:0] prog_row;
  logic [$clog2(COLS+2)-1:0] prog_col;
  logic signed [7:0] prog_w;
  logic signed [NUM_ARRAYS-1:0][GB:0] prog_var;
  logic [31:0] clipped_count;
  logic x_we = 0;
  logic [LROWS-1:0] x_addr;
  logic [7:0] x_data;
  logic start = 0;
  logic [$clog2(LROWS+1)-1:0] naw_log2;
  logic busy, done;
  logic signed [31:0] y [COLS];

  int w [ROWS][COLS];
  int x [ROWS];
  int checks = 0, failures = 0;
  int n_clip_w = 0, n_orig = 0, n_bias = 0, n_ref = 0, n_var_runs = 0;
  int n_mode [LROWS+1];

  vecom_tile #(.ROWS (ROWS), .COLS (COLS)) dut (
    .clk, .rst, .prog_valid, .prog_row, .prog_col, .prog_w, .prog_var, .clipped_count,
    .x_we, .x_addr, .x_data, .start, .naw_log2, .busy, .done, .y);

  always #5 clk = ~clk;

  // mechanism monitors
  always @(posedge clk) begin
    if (dut.sa_valid && dut.code[NUM_ARRAYS*COLS] != 0) n_bias++;
    if (dut.adc_start && dut.g_arr[0].i_ref != 0) n_ref++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic program_all(input int vmax);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS + 2; c++) begin
        @(negedge clk);
        prog_valid = 1; prog_row = LROWS'(r); prog_col = $bits(prog_col)'(c);
        prog_w = (c < COLS) ? 8'(w[r][c]) : 8'(0);
        for (int a = 0; a < NUM_ARRAYS; a++)
          prog_var[a] = (GB+1)'(int'($urandom_range(0, 2 * vmax)) - vmax);
      end
    @(negedge clk) prog_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic run(input int k);
    int cyc, exp, wc;
    @(negedge clk);
    while (busy) @(negedge clk);     // start is taken only while idle
    naw_log2 = $bits(naw_log2)'(k); start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin
      @(posedge clk); #1;
      cyc++;
    end
    check(cyc == 8 * (ROWS >> k) * (k + 4), $sformatf("NAW %0d cycles %0d", 1 << k, cyc));
    for (int j = 0; j < COLS; j++) begin
      exp = 0;
      for (int i = 0; i < ROWS; i++) begin
        wc = (w[i][j] < -64) ? -64 : w[i][j];
        exp += x[i] * wc;
      end
      check(y[j] == exp, $sformatf("NAW %0d col %0d: %0d expected %0d", 1 << k, j, y[j], exp));
    end
    n_mode[k]++;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u;
    prog_row = 0; prog_col = 0; prog_w = 0; prog_var = '0;
    x_addr = 0; x_data = 0; naw_log2 = 0;
    for (int k = 0; k <= LROWS; k++) n_mode[k] = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        // mostly small weights, some outliers of both signs
        w[r][c] = ($urandom_range(0, 7) == 0) ? int'($urandom_range(0, 255)) - 128
                                               : int'($urandom_range(0, 128)) - 64;
        if (w[r][c] < -64) n_clip_w++;
        u = (w[r][c] + 64 < 0) ? 0 : w[r][c] + 64;
        if (((u >> 4) & 3) == 3) n_orig++;
      end
    w[0][0] = -128; w[1][0] = 127; w[2][0] = -65; w[3][0] = 63;  // corner cases
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;

    program_all(0);
    check(int'(clipped_count) >= 1, "clipping happened");

    for (int t = 0; t < 3; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        x[r] = (t == 0) ? 255 : int'($urandom_range(0, 255));
        @(negedge clk);
        x_we = 1; x_addr = LROWS'(r); x_data = 8'(x[r]);
      end
      @(negedge clk) x_we = 0;
      for (int k = 0; k <= LROWS; k++) run(k);
    end

    // device deviation of -1..+1 units on every cell
    program_all(1);
    for (int t = 0; t < 2; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        x[r] = int'($urandom_range(0, 255));
        @(negedge clk);
        x_we = 1; x_addr = LROWS'(r); x_data = 8'(x[r]);
      end
      @(negedge clk) x_we = 0;
      for (int k = 0; k <= 3; k++) begin
        run(k);
        n_var_runs++;
      end
    end

    $display("mechanisms: clipped_weights=%0d origin_weights=%0d bias_steps=%0d ref_steps=%0d var_runs=%0d",
             clipped_count, n_orig, n_bias, n_ref, n_var_runs);
    check(clipped_count != 0, "weight clipping happened");
    check(n_orig != 0, "Origin array used");
    check(n_bias != 0, "bias correction happened");
    check(n_ref != 0, "offset current subtracted");
    check(n_var_runs != 0, "runs with device deviation");
    for (int k = 0; k <= LROWS; k++) check(n_mode[k] != 0, $sformatf("NAW mode %0d used", 1 << k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
