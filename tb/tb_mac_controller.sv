// tb_mac_controller: runs the sequencer against an ADC stand-in in the
// testbench that raises adc_done res+1 edges after it samples adc_start
// (the SAR latency).  For NAW = 1..128 it checks that the steps visit every
// (input bit, group) pair in order (bit-major, groups inner), that adc_res
// is log2(NAW)+2, that sa_clear comes with start, and that done arrives
// exactly 8 * (128/NAW) * (log2(NAW)+4) cycles after the start edge.
module tb_mac_controller;
  localparam int ROWS = 128, AB = 8;
  logic clk = 0, rst = 1, start = 0;
  logic [2:0] naw_log2, naw_q;
  logic [2:0] bit_sel;
  logic [6:0] group;
  logic adc_start, adc_done = 0;
  logic [3:0] adc_res;
  logic sa_clear, sa_valid, busy, done;
  int checks = 0, failures = 0;

  mac_controller #(.ROWS (ROWS), .ACT_BITS (AB)) dut (
    .clk, .rst, .start, .naw_log2, .bit_sel, .group, .naw_log2_q (naw_q),
    .adc_start, .adc_res, .adc_done, .sa_clear, .sa_valid, .busy, .done);

  always #5 clk = ~clk;

  // ADC stand-in: done pulse res+1 edges after the sampling edge of start
  int adc_cnt = -1;
  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_cnt > 0) begin
      adc_cnt <= adc_cnt - 1;
      if (adc_cnt == 1) adc_done <= 1'b1;
    end else if (adc_start) begin
      adc_cnt <= int'(adc_res);
      if (adc_res == 0) adc_done <= 1'b1;
    end
  end

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
    int cyc, steps, exp_b, exp_g, ng, naw;
    naw_log2 = 7;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 7; k >= 0; k--) begin
      naw = 1 << k; ng = ROWS / naw;
      @(negedge clk);
      naw_log2 = 3'(k); start = 1;
      #1 check(sa_clear, "sa_clear with start");
      @(posedge clk); #1 start = 0;
      cyc = 0; steps = 0;
      check(int'(adc_res) == k + 2, "ADC resolution log2(NAW)+2");
      while (!done && cyc < 5000) begin
        if (sa_valid) begin
          exp_b = steps / ng; exp_g = steps % ng;
          check(int'(bit_sel) == exp_b && int'(group) == exp_g,
                $sformatf("step %0d visits bit %0d group %0d", steps, bit_sel, group));
          steps++;
        end
        @(posedge clk); #1;
        cyc++;
      end
      check(steps == AB * ng, $sformatf("NAW %0d: %0d steps", naw, steps));
      check(cyc == AB * ng * (k + 4), $sformatf("NAW %0d: %0d cycles, expected %0d", naw, cyc, AB * ng * (k + 4)));
      $display("NAW=%0d cycles=%0d", naw, cyc);
      @(posedge clk); #1;
      check(!busy && !done, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
