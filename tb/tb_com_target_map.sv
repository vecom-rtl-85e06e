// tb_com_target_map: checks the conductance offset mapping G' = G + G00.
// The MLC instance uses the tile defaults (G_LSB 64, G00 32); a second
// instance with 4-bit (QLC) levels and other units checks that the rule
// holds for any cell precision.  It also checks the property the mapping
// exists for: the sum of targets of N cells minus N*G00 equals the sum of
// their ideal level conductances.
module tb_com_target_map;
  logic [1:0] lvl2;
  logic [9:0] g2;
  logic [3:0] lvl4;
  logic [11:0] g4;
  int checks = 0, failures = 0;

  com_target_map dut_mlc (.level (lvl2), .g_target (g2));
  com_target_map #(.LEVEL_BITS (4), .G_BITS (12), .G_LSB (40), .G_HRS (7))
    dut_qlc (.level (lvl4), .g_target (g4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum_t, sum_i, n, l;
    for (int k = 0; k < 4; k++) begin
      lvl2 = 2'(k);
      #1;
      check(g2 == 10'(k * 64 + 32), $sformatf("MLC level %0d -> %0d", k, g2));
    end
    lvl2 = 0; #1;
    check(g2 == 32, "level 00 stays at G00");
    for (int k = 0; k < 16; k++) begin
      lvl4 = 4'(k);
      #1;
      check(g4 == 12'(k * 40 + 7), $sformatf("QLC level %0d -> %0d", k, g4));
    end
    // offset subtraction is exact: sum(G') - N*G00 = sum(level*G_LSB)
    for (int t = 0; t < 50; t++) begin
      n = 1 + $urandom_range(0, 127);
      sum_t = 0; sum_i = 0;
      for (int i = 0; i < n; i++) begin
        l = $urandom_range(0, 3);
        lvl2 = 2'(l);
        #1;
        sum_t += g2;
        sum_i += l * 64;
      end
      check(sum_t - n * 32 == sum_i, "reference subtraction exact");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
