// tb_vecom_naw_sweep: the tile under conductance variation, swept over the
// number of activated wordlines (NAW = 8, 16, 32, 64, 128), at full size
// (128 x 128, default parameters).
//
// Every cell is programmed with a log-normal deviation, G = G' * exp(theta),
// theta ~ N(0, sigma^2), the variation model commonly used for ReRAM.  The
// testbench keeps its own copy of each cell's resulting conductance and
// predicts, step by step, every ADC code
//     code = clamp(floor((I_bitline - I_reference + 32) / 64), 0, 2^res - 1)
// and from them the tile output; each output must match that prediction
// exactly.  It also reports, for information, how far the outputs stray from
// the ideal product sum x*max(w,-64) (mean absolute error per output) for
// sigma = 0 (must be exact), 0.02 and 0.08.  Weights follow a bell-shaped
// distribution concentrated in [-64, 63], like trained network weights.
module tb_vecom_naw_sweep;
  import vecom_pkg::*;
  localparam int ROWS = 128, COLS = 128, GB = 10, NA = NUM_ARRAYS;

  logic clk = 0, rst = 1;
  logic prog_valid = 0;
  logic [6:0] prog_row;
  logic [7:0] prog_col;
  logic signed [7:0] prog_w;
  logic signed [NA-1:0][GB:0] prog_var;
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
  int g [NA][ROWS][COLS+2];     // conductance of every cell, as programmed
  int checks = 0, failures = 0;
  int seed = 7;

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

  function automatic int level_of(int a, int wt);
    int u = (wt + 64 < 0) ? 0 : wt + 64;
    int v = (u >> 4) & 3;
    case (a)
      0: return u >> 6;
      1: return (v == 3) ? 1 : 0;
      2: return (v == 3) ? 0 : v;
      3: return (u >> 2) & 3;
      default: return u & 3;
    endcase
  endfunction

  // program every cell with a log-normal deviation of the given sigma
  task automatic program_all(input real sigma);
    int lvl, tgt, dev, gv;
    real th;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS + 2; c++) begin
        @(negedge clk);
        prog_valid = 1; prog_row = 7'(r); prog_col = 8'(c);
        prog_w = (c < COLS) ? 8'(w[r][c]) : 8'(0);
        for (int a = 0; a < NA; a++) begin
          if (c < COLS) lvl = level_of(a, w[r][c]);
          else if (c == COLS) lvl = 0;
          else lvl = (a == 0) ? 1 : 0;
          tgt = lvl * 64 + 32;
          th  = sigma * real'($dist_normal(seed, 0, 1000)) / 1000.0;
          dev = int'($rtoi(real'(tgt) * $exp(th) + 0.5)) - tgt;
          prog_var[a] = (GB+1)'(dev);
          gv = tgt + dev;
          g[a][r][c] = (gv < 0) ? 0 : (gv > 1023) ? 1023 : gv;
        end
      end
    @(negedge clk) prog_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic run(input int k, input real sigma);
    int naw, res, cmax, cyc, ib, iref, code, ex, wc;
    longint pred [COLS];
    longint sum_err;
    int step_w [NA] = '{64, 48, 16, 4, 1};
    naw = 1 << k; res = k + 2; cmax = (1 << res) - 1;
    for (int j = 0; j < COLS; j++) pred[j] = 0;
    // independent prediction of the codes and the outputs
    for (int b = 0; b < 8; b++)
      for (int gr = 0; gr < ROWS / naw; gr++) begin
        longint bias_term;
        ib = 0; iref = 0;
        for (int r = gr * naw; r < (gr + 1) * naw; r++)
          if ((x[r] >> b) & 1) begin ib += g[0][r][COLS+1]; iref += g[0][r][COLS]; end
        code = (ib - iref + 32) >>> 6;
        code = (ib - iref + 32 < 0) ? 0 : (code > cmax) ? cmax : code;
        bias_term = 64 * longint'(code);
        for (int j = 0; j < COLS; j++) begin
          longint s = -bias_term;
          for (int a = 0; a < NA; a++) begin
            ib = 0; iref = 0;
            for (int r = gr * naw; r < (gr + 1) * naw; r++)
              if ((x[r] >> b) & 1) begin ib += g[a][r][j]; iref += g[a][r][COLS]; end
            code = (ib - iref + 32 < 0) ? 0 : ((ib - iref + 32) >>> 6);
            if (code > cmax) code = cmax;
            s += step_w[a] * code;
          end
          pred[j] += s << b;
        end
      end
    @(negedge clk);
    while (busy) @(negedge clk);
    naw_log2 = 3'(k); start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin
      @(posedge clk); #1;
      cyc++;
    end
    check(cyc == 8 * (ROWS / naw) * (k + 4), $sformatf("NAW %0d cycles %0d", naw, cyc));
    sum_err = 0;
    for (int j = 0; j < COLS; j++) begin
      check(longint'(y[j]) == pred[j], $sformatf("sigma %f NAW %0d col %0d: %0d predicted %0d", sigma, naw, j, y[j], pred[j]));
      ex = 0;
      for (int i = 0; i < ROWS; i++) begin
        wc = (w[i][j] < -64) ? -64 : w[i][j];
        ex += x[i] * wc;
      end
      sum_err += (longint'(y[j]) > ex) ? longint'(y[j]) - ex : ex - longint'(y[j]);
      if (sigma == 0.0) check(y[j] == ex, "ideal cells give the exact product");
    end
    $display("sigma=%4.2f NAW=%3d cycles=%4d mean |error| per output = %0d", sigma, naw, cyc, sum_err / COLS);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sig [3] = '{0.0, 0.02, 0.08};
    prog_row = 0; prog_col = 0; prog_w = 0; prog_var = '0;
    x_addr = 0; x_data = 0; naw_log2 = 7;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int v = $dist_normal(seed, 0, 24);
        w[r][c] = (v < -128) ? -128 : (v > 127) ? 127 : v;
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = int'($urandom_range(0, 255));
      @(negedge clk);
      x_we = 1; x_addr = 7'(r); x_data = 8'(x[r]);
    end
    @(negedge clk) x_we = 0;
    foreach (sig[s]) begin
      program_all(sig[s]);
      for (int k = 3; k <= 7; k++) run(k, sig[s]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
