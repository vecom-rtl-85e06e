// tb_shift_add: drives random slice codes, bias-count codes and bit
// positions into a 4-column unit and keeps a reference accumulator
//   acc += (64*msb + 48*orig + 16*redun + 4*b32 + b10 - 64*bias) << bit
// computed in the testbench; checks all columns after every step and
// that clear zeroes them.
module tb_shift_add;
  import vecom_pkg::*;
  localparam int COLS = 4, RM = 9;
  logic clk = 0, rst = 1, clear = 0, valid = 0;
  logic [2:0] bit_pos;
  logic [NUM_ARRAYS-1:0][COLS-1:0][RM-1:0] codes;
  logic [RM-1:0] bias_code;
  logic signed [31:0] acc [COLS];
  longint model [COLS];
  int checks = 0, failures = 0;
  int wts [5] = '{64, 48, 16, 4, 1};

  shift_add #(.COLS (COLS), .RES_MAX (RM)) dut (.clk, .rst, .clear, .valid, .bit_pos, .codes, .bias_code, .acc);

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
    longint s;
    codes = '0; bias_code = '0; bit_pos = '0;
    for (int j = 0; j < COLS; j++) model[j] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 500; t++) begin
      if (t % 40 == 0) begin
        clear = 1; valid = 0;
        for (int j = 0; j < COLS; j++) model[j] = 0;
      end else begin
        clear = 0; valid = ($urandom_range(0, 3) != 0);
      end
      bit_pos = 3'($urandom);
      bias_code = RM'($urandom_range(0, 128));
      for (int a = 0; a < NUM_ARRAYS; a++)
        for (int j = 0; j < COLS; j++)
          codes[a][j] = RM'($urandom_range(0, 384));
      if (valid)
        for (int j = 0; j < COLS; j++) begin
          s = -64 * longint'(bias_code);
          for (int a = 0; a < NUM_ARRAYS; a++) s += wts[a] * longint'(codes[a][j]);
          model[j] += s << bit_pos;
        end
      @(negedge clk);
      for (int j = 0; j < COLS; j++)
        check(longint'(acc[j]) == model[j], $sformatf("t=%0d col %0d: %0d vs %0d", t, j, acc[j], model[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
