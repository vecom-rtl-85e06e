// tb_reram_crossbar: programs a small crossbar (8 rows, 4 weight columns,
// reference and bias columns) with random conductances and deviations,
// keeps its own copy of the clamped cell values, and checks every bitline,
// reference and bias current against that copy for random wordline
// patterns.  Also checks clamping at 0 and at full scale.
module tb_reram_crossbar;
  localparam int ROWS = 8, COLS = 4, GB = 10, IB = GB + 3;

  logic clk = 0;
  logic wr_en = 0;
  logic [2:0] wr_row;
  logic [2:0] wr_col;
  logic [GB-1:0] wr_g;
  logic signed [GB:0] wr_var;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0][IB-1:0] i_bl;
  logic [IB-1:0] i_ref, i_bias;
  int model [ROWS][COLS+2];
  int checks = 0, failures = 0;

  reram_crossbar #(.ROWS (ROWS), .COLS (COLS), .G_BITS (GB), .HAS_BIAS_COL (1'b1))
    dut (.clk, .wr_en, .wr_row, .wr_col, .wr_g, .wr_var, .wl, .i_bl, .i_ref, .i_bias);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic write(input int r, input int c, input int g, input int v);
    int e;
    @(negedge clk);
    wr_en = 1; wr_row = 3'(r); wr_col = 3'(c); wr_g = GB'(g); wr_var = (GB+1)'(v);
    @(negedge clk);
    wr_en = 0;
    e = g + v;
    if (e < 0) e = 0;
    if (e > 1023) e = 1023;
    model[r][c] = e;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    wl = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS + 2; c++)
        write(r, c, $urandom_range(0, 300), int'($urandom_range(0, 20)) - 10);
    write(0, 0, 5, -40);          // clamps to 0
    write(1, 1, 1020, 30);        // clamps to 1023
    for (int t = 0; t < 200; t++) begin
      wl = ROWS'($urandom);
      if (t == 0) wl = 8'h03;
      if (t == 1) wl = '1;
      #1;
      for (int c = 0; c < COLS + 2; c++) begin
        e = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r]) e += model[r][c];
        if (c < COLS) check(i_bl[c] == IB'(e), $sformatf("col %0d: %0d vs %0d", c, i_bl[c], e));
        else if (c == COLS) check(i_ref == IB'(e), "reference column");
        else check(i_bias == IB'(e), "bias column");
      end
    end
    wl = 8'h01; #1; check(i_bl[0] == 0, "clamp at 0");
    wl = 8'h02; #1; check(i_bl[1] == 1023, "clamp at full scale");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
