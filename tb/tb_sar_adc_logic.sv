// tb_sar_adc_logic: a bank of 4 SAR registers converts random target codes
// through an ideal comparator built in the testbench (cmp = trial <= target).
// Checks each final code against min(target, 2^res - 1) for every
// resolution 1..9, the one-bit-per-cycle order (trial bits appear MSB
// first) and the conversion latency: done is high exactly res edges
// after the edge that samples start.
module tb_sar_adc_logic;
  localparam int N = 4, RM = 9;
  logic clk = 0, rst = 1, start = 0;
  logic [3:0] res;
  logic [N-1:0] cmp;
  logic [N-1:0][RM-1:0] trial, code;
  logic busy, done;
  int target [N];
  int checks = 0, failures = 0;

  sar_adc_logic #(.N (N), .RES_MAX (RM)) dut (.clk, .rst, .start, .res, .cmp, .trial, .code, .busy, .done);

  always #5 clk = ~clk;
  always_comb for (int c = 0; c < N; c++) cmp[c] = (int'(trial[c]) <= target[c]);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, r, exp;
    for (int c = 0; c < N; c++) target[c] = 0;
    res = 4'd9;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 300; t++) begin
      r = 1 + (t % RM);
      for (int c = 0; c < N; c++) target[c] = $urandom_range(0, 600);
      @(negedge clk);
      res = 4'(r); start = 1;
      @(posedge clk);              // start sampled here
      #1 start = 0;
      lat = 0;
      // first comparison cycle presents the MSB of the requested width
      check(busy && trial[0] == RM'(1 << (r - 1)), "MSB trial first");
      while (!done) begin
        @(posedge clk); #1;
        lat++;
        if (lat > 20) break;
      end
      check(lat == r, $sformatf("latency res=%0d: %0d edges", r, lat));
      for (int c = 0; c < N; c++) begin
        exp = (target[c] > (1 << r) - 1) ? (1 << r) - 1 : target[c];
        check(int'(code[c]) == exp, $sformatf("res=%0d target=%0d code=%0d", r, target[c], code[c]));
      end
      @(posedge clk); #1;
      check(!done && !busy, "done is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
