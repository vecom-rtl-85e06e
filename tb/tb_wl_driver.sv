// tb_wl_driver: loads 128 random activations, then for random input bits,
// NAW settings (1..128) and groups checks every wordline against
//   wl[r] = x[r][bit] && (r / NAW == group).
// Also checks that at most NAW wordlines are on.
module tb_wl_driver;
  localparam int ROWS = 128;
  logic clk = 0;
  logic x_we = 0;
  logic [6:0] x_addr;
  logic [7:0] x_data;
  logic [2:0] bit_sel;
  logic [6:0] group;
  logic [2:0] naw_log2;
  logic [ROWS-1:0] wl;
  logic [7:0] x [ROWS];
  int checks = 0, failures = 0;

  wl_driver dut (.clk, .x_we, .x_addr, .x_data, .bit_sel, .group, .naw_log2, .wl);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int naw, on;
    bit exp;
    bit_sel = 0; group = 0; naw_log2 = 7;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = 8'($urandom);
      @(negedge clk);
      x_we = 1; x_addr = 7'(r); x_data = x[r];
    end
    @(negedge clk) x_we = 0;
    for (int t = 0; t < 400; t++) begin
      naw_log2 = 3'($urandom_range(0, 7));
      naw = 1 << naw_log2;
      group = 7'($urandom_range(0, ROWS / naw - 1));
      bit_sel = 3'($urandom);
      #1;
      on = 0;
      for (int r = 0; r < ROWS; r++) begin
        exp = x[r][bit_sel] && (r / naw == group);
        on += int'(exp);
        checks++;
        if (wl[r] != exp) begin
          failures++;
          $display("FAIL row %0d bit %0d naw %0d group %0d", r, bit_sel, naw, group);
        end
      end
      checks++;
      if ($countones(wl) > naw) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
