// tb_weight_programmer: random weight, reference-column and bias-column
// writes.  For each, the expected per-array enables, target conductances
// (level*64 + 32, with the levels worked out here from u = max(w+64,0) and
// the Origin/Redun split) and pass-through of address and deviation are
// checked one cycle later, and the clipped-weight counter is checked at
// the end.
module tb_weight_programmer;
  import vecom_pkg::*;
  logic clk = 0, rst = 1;
  logic prog_valid = 0;
  logic [6:0] prog_row;
  logic [7:0] prog_col;
  logic signed [7:0] prog_w;
  logic signed [4:0][10:0] prog_var;
  logic [4:0] wr_en;
  logic [6:0] wr_row;
  logic [7:0] wr_col;
  logic [4:0][9:0] wr_g;
  logic signed [4:0][10:0] wr_var;
  logic [31:0] clipped_count;
  int checks = 0, failures = 0;

  weight_programmer dut (.clk, .rst, .prog_valid, .prog_row, .prog_col, .prog_w, .prog_var,
                         .wr_en, .wr_row, .wr_col, .wr_g, .wr_var, .clipped_count);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u, lv [5], nclip, kind, w;
    logic [4:0] en_exp;
    nclip = 0;
    prog_row = 0; prog_col = 0; prog_w = 0; prog_var = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 1000; t++) begin
      kind = $urandom_range(0, 9);
      w = int'($urandom_range(0, 255)) - 128;
      prog_valid = ($urandom_range(0, 4) != 0);
      prog_row = 7'($urandom);
      prog_col = (kind == 0) ? 8'd128 : (kind == 1) ? 8'd129 : 8'($urandom_range(0, 127));
      prog_w = 8'(w);
      for (int a = 0; a < 5; a++) prog_var[a] = 11'(int'($urandom_range(0, 40)) - 20);
      u = (w + 64 < 0) ? 0 : w + 64;
      for (int a = 0; a < 5; a++) lv[a] = 0;
      en_exp = 5'b11111;
      if (kind == 1) begin en_exp = 5'b00001; lv[0] = 1; end
      else if (kind >= 2) begin
        lv[0] = u >> 6;
        lv[1] = (((u >> 4) & 3) == 3) ? 1 : 0;
        lv[2] = (((u >> 4) & 3) == 3) ? 0 : ((u >> 4) & 3);
        lv[3] = (u >> 2) & 3;
        lv[4] = u & 3;
        if (prog_valid && w < -64) nclip++;
      end
      if (!prog_valid) en_exp = '0;
      @(negedge clk);
      check(wr_en == en_exp, $sformatf("enables %b vs %b", wr_en, en_exp));
      if (prog_valid) begin
        check(wr_row == prog_row && wr_col == prog_col, "address");
        for (int a = 0; a < 5; a++) if (en_exp[a]) begin
          check(int'(wr_g[a]) == lv[a] * 64 + 32, $sformatf("w=%0d array %0d target %0d", w, a, wr_g[a]));
          check(wr_var[a] == prog_var[a], "deviation passed on");
        end
      end
    end
    prog_valid = 0;
    @(negedge clk);
    check(int'(clipped_count) == nclip, $sformatf("clipped count %0d vs %0d", clipped_count, nclip));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
