// tb_vecom_encoder: exhaustive check of the VECOM weight encoding.
// For all 256 signed weights it recomputes, independently of the block,
// the biased and clipped value u = max(w + 64, 0) and checks each slice
// level, the Origin/Redun ranges (Origin 0..1, Redun 0..2), the clip flag,
// and that the shift-and-add weights 64/48/16/4/1 rebuild u exactly.
module tb_vecom_encoder;
  import vecom_pkg::*;

  logic signed [7:0] w;
  vecom_levels_t     levels;
  logic              clipped;
  int checks = 0, failures = 0;

  vecom_encoder dut (.w, .levels, .clipped);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL w=%0d: %s", w, what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u, v, rebuilt;
    int n_clip = 0, n_orig = 0;
    for (int k = -128; k < 128; k++) begin
      w = 8'(k);
      #1;
      u = (k + 64 < 0) ? 0 : k + 64;
      v = (u >> 4) & 3;
      check(clipped == (k < -64), "clip flag");
      check(levels.msb == 2'(u >> 6), "MSB slice");
      check(levels.b32 == 2'(u >> 2), "[3:2] slice");
      check(levels.b10 == 2'(u), "[1:0] slice");
      check(levels.orig <= 1, "Origin holds only 00/01");
      check(levels.redun <= 2, "Redun holds only 00/01/10");
      check(3 * levels.orig + levels.redun == v, "3*Origin + Redun = [5:4]");
      rebuilt = 64 * levels.msb + 48 * levels.orig + 16 * levels.redun
              + 4 * levels.b32 + levels.b10;
      check(rebuilt - 64 == ((k < -64) ? -64 : k), "weight rebuilt");
      if (clipped) n_clip++;
      if (levels.orig == 1) n_orig++;
    end
    check(n_clip == 64, "64 weights clipped (-128..-65)");
    check(n_orig == 48, "48 biased values have [5:4] = 11");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
