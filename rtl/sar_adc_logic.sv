// sar_adc_logic: successive-approximation registers for a bank of N column
// ADCs that convert together.
//
// A conversion resolves one bit per clock, most significant first.  The
// number of bits is set per conversion by res (1..RES_MAX); the tile uses
// res = log2(NAW) + 2, enough for NAW activated 2-bit cells whose sum is at
// most 3*NAW.  Each column keeps its own code register; the bit counter is
// shared.  The trial code (code so far with the current bit set) goes to the
// analog comparator, whose decision keeps or drops that bit.
//
// Timing: start is sampled on a clock edge while idle; the comparisons are
// taken on the next res edges; done is high for one cycle after the last
// one, with code valid from then until the next start.  A conversion thus
// takes res cycles: done rises on the res-th edge after the sampling one.  Synchronous
// active-high reset clears codes and control.
//
// SAR conversion and the resolution log2(NAW)+2 follow the paper; sharing
// one bit counter across the bank and the runtime res input are this
// design's choices.
module sar_adc_logic #(
  parameter int unsigned N       = 129,
  parameter int unsigned RES_MAX = 9
) (
  input  logic                                 clk,
  input  logic                                 rst,
  input  logic                                 start,
  input  logic [$clog2(RES_MAX+1)-1:0]         res,
  input  logic [N-1:0]                         cmp,
  output logic [N-1:0][RES_MAX-1:0]            trial,
  output logic [N-1:0][RES_MAX-1:0]            code,
  output logic                                 busy,
  output logic                                 done
);

  logic [$clog2(RES_MAX)-1:0] bit_idx;
  logic [RES_MAX-1:0]         bit_mask;

  always_comb begin
    bit_mask = RES_MAX'(1) << bit_idx;
    for (int c = 0; c < N; c++)
      trial[c] = busy ? (code[c] | bit_mask) : code[c];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      bit_idx <= '0;
      code    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          bit_idx <= $bits(bit_idx)'(res - 1'b1);
          code    <= '0;
        end
      end else begin
        for (int c = 0; c < N; c++)
          if (cmp[c]) code[c] <= trial[c];
        if (bit_idx == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bit_idx <= bit_idx - 1'b1;
        end
      end
    end
  end

  // A start must ask for 1..RES_MAX bits
  assert property (@(posedge clk) disable iff (rst)
                   (start && !busy) |-> (res != 0 && 32'(res) <= RES_MAX));

endmodule
