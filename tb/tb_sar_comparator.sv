// tb_sar_comparator: random bitline, reference and trial values; the
// expected decision is computed in doubled integer units,
//   2*(i - ref) >= (2*trial - 1) * G_LSB,
// which is the offset-subtracted current compared with the DAC level of
// the trial code with a half-step rounding offset.
module tb_sar_comparator;
  localparam int N = 6, IB = 17, RM = 9, G = 64;
  logic [N-1:0][IB-1:0] i_in;
  logic [IB-1:0] i_ref;
  logic [N-1:0][RM-1:0] trial;
  logic [N-1:0] cmp;
  int checks = 0, failures = 0;

  sar_comparator #(.N (N), .I_BITS (IB), .RES_MAX (RM), .G_LSB (G))
    dut (.i_in, .i_ref, .trial, .cmp);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint d, lv;
    bit exp;
    for (int t = 0; t < 2000; t++) begin
      i_ref = IB'($urandom_range(0, 4096));
      for (int c = 0; c < N; c++) begin
        trial[c] = RM'($urandom_range(0, 511));
        // keep the current near the decision level half the time
        if (t % 2 == 0)
          i_in[c] = IB'(int'(i_ref) + int'(trial[c]) * G - G / 2 + int'($urandom_range(0, 2)) - 1);
        else
          i_in[c] = IB'($urandom_range(0, 40000));
      end
      #1;
      for (int c = 0; c < N; c++) begin
        d   = 2 * (longint'(i_in[c]) - longint'(i_ref));
        lv  = (2 * longint'(trial[c]) - 1) * G;
        exp = (d >= lv);
        checks++;
        if (cmp[c] != exp) begin
          failures++;
          $display("FAIL i=%0d ref=%0d trial=%0d cmp=%0d", i_in[c], i_ref, trial[c], cmp[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
