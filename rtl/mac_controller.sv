// mac_controller: sequencer of one matrix-vector multiplication on a tile.
//
// A multiplication walks the ACT_BITS input bits (least significant first)
// and, for each bit, the ROWS/NAW wordline groups.  Each step:
//   DRIVE  wordlines of (bit, group) are on; adc_start is raised,
//   CONV   the SAR ADCs resolve res = log2(NAW)+2 bits, one per cycle,
//   then   on the cycle adc_done is high, sa_valid makes the shift-and-add
//          unit take the codes, and the next step begins.
// A step takes res+2 cycles, so with S = ACT_BITS*ROWS/NAW steps, done is
// high S*(res+2) cycles after the edge that samples start (88 cycles at
// NAW = 128, 896 at NAW = 8).  The cost of a step growing only with log2(NAW)
// while the number of steps falls with NAW is where the throughput gain of
// activating more wordlines comes from.
//
// Interface: start (sampled while idle) with naw_log2 (NAW = 2**naw_log2,
// latched at start); sa_clear is raised with an accepted start.  busy is high
// from start to done; done is a one-cycle pulse.  Synchronous active-high
// reset.  The bit-serial order, the ADC resolution rule and the ADC-bound
// cycle time follow the paper; the state sequence is this design's.
module mac_controller #(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned ACT_BITS = 8,
  localparam int unsigned LW      = $clog2($clog2(ROWS)+1),
  localparam int unsigned RES_MAX = $clog2(ROWS) + 2
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic [LW-1:0]                 naw_log2,
  // wordline selection
  output logic [$clog2(ACT_BITS)-1:0]   bit_sel,
  output logic [$clog2(ROWS)-1:0]       group,
  output logic [LW-1:0]                 naw_log2_q,
  // ADC control
  output logic                          adc_start,
  output logic [$clog2(RES_MAX+1)-1:0]  adc_res,
  input  logic                          adc_done,
  // shift-and-add control
  output logic                          sa_clear,
  output logic                          sa_valid,
  // status
  output logic                          busy,
  output logic                          done
);

  typedef enum logic [1:0] {S_IDLE, S_DRIVE, S_CONV, S_DONE} state_e;
  state_e state;

  localparam int unsigned GW = $clog2(ROWS);

  logic [GW-1:0] last_group;
  always_comb begin
    last_group = GW'((ROWS >> naw_log2_q) - 1);
    adc_res    = $bits(adc_res)'(naw_log2_q) + $bits(adc_res)'(2);
    adc_start  = (state == S_DRIVE);
    sa_clear   = (state == S_IDLE) && start;
    sa_valid   = (state == S_CONV) && adc_done;
    busy       = (state != S_IDLE);
    done       = (state == S_DONE);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      bit_sel    <= '0;
      group      <= '0;
      naw_log2_q <= LW'($clog2(ROWS));
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_DRIVE;
          bit_sel    <= '0;
          group      <= '0;
          naw_log2_q <= naw_log2;
        end
        S_DRIVE: state <= S_CONV;
        S_CONV: if (adc_done) begin
          if (group == last_group) begin
            group <= '0;
            if (bit_sel == $bits(bit_sel)'(ACT_BITS - 1)) begin
              state <= S_DONE;
            end else begin
              bit_sel <= bit_sel + 1'b1;
              state   <= S_DRIVE;
            end
          end else begin
            group <= group + 1'b1;
            state <= S_DRIVE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst)
                   (state == S_IDLE && start) |-> (32'(naw_log2) <= GW));

endmodule
