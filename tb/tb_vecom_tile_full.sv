// tb_vecom_tile_full: one complete operation of the tile at its full size
// (128x128 crossbars, default parameters).  Programs all 128x128 weights
// (random, with outliers that get clipped), the reference columns and the
// bias-count column with ideal cells, loads 128 random activations and runs
// the multiplication with all 128 wordlines active (NAW = 128, 9-bit ADC),
// then again with NAW = 16.  Every output is compared with
// sum_i x[i] * max(w[i][j], -64), and the cycle counts with
// 8 * (128/NAW) * (log2(NAW)+4): 88 and 512 cycles.
module tb_vecom_tile_full;
  import vecom_pkg::*;
  localparam int ROWS = 128, COLS = 128, GB = 10;

  logic clk = 0, rst = 1;
  logic prog_valid = 0;
  logic [6:0] prog_row;
  logic [7:0] prog_col;
  logic signed [7:0] prog_w;
  logic signed [NUM_ARRAYS-1:0][GB:0] prog_var;
  logic [31:0] clipped_count;
  logic x_we = 0;
  logic [6:0] x_addr;
  logic [7:0] x_data;
  logic start = 0;
  logic [2:0] naw_log2;
  logic busy, done;
  logic signed [31:0] y [COLS];

  int w [ROWS][COLS];
  int x [ROWS];
  int checks = 0, failures = 0, nclip = 0;

  vecom_tile dut (
    .clk, .rst, .prog_valid, .prog_row, .prog_col, .prog_w, .prog_var, .clipped_count,
    .x_we, .x_addr, .x_data, .start, .naw_log2, .busy, .done, .y);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input int k);
    int cyc, exp, wc;
    @(negedge clk);
    while (busy) @(negedge clk);
    naw_log2 = 3'(k); start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin
      @(posedge clk); #1;
      cyc++;
    end
    $display("NAW=%0d: %0d cycles", 1 << k, cyc);
    check(cyc == 8 * (ROWS >> k) * (k + 4), $sformatf("NAW %0d cycles %0d", 1 << k, cyc));
    for (int j = 0; j < COLS; j++) begin
      exp = 0;
      for (int i = 0; i < ROWS; i++) begin
        wc = (w[i][j] < -64) ? -64 : w[i][j];
        exp += x[i] * wc;
      end
      check(y[j] == exp, $sformatf("NAW %0d col %0d: %0d expected %0d", 1 << k, j, y[j], exp));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_row = 0; prog_col = 0; prog_w = 0; prog_var = '0;
    x_addr = 0; x_data = 0; naw_log2 = 7;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = ($urandom_range(0, 15) == 0) ? int'($urandom_range(0, 255)) - 128
                                                : int'($urandom_range(0, 128)) - 64;
        if (w[r][c] < -64) nclip++;
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS + 2; c++) begin
        @(negedge clk);
        prog_valid = 1; prog_row = 7'(r); prog_col = 8'(c);
        prog_w = (c < COLS) ? 8'(w[r][c]) : 8'(0);
      end
    @(negedge clk) prog_valid = 0;
    repeat (2) @(negedge clk);
    check(int'(clipped_count) == nclip, $sformatf("clipped %0d of %0d weights", clipped_count, ROWS * COLS));
    for (int r = 0; r < ROWS; r++) begin
      x[r] = int'($urandom_range(0, 255));
      @(negedge clk);
      x_we = 1; x_addr = 7'(r); x_data = 8'(x[r]);
    end
    @(negedge clk) x_we = 0;
    run(7);
    run(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
