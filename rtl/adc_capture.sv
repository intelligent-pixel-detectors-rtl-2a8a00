// adc_capture: digital side of one pixel's 2-bit thermometric flash ADC.
//
// The pixel's analog island compares the preamplifier output with three
// thresholds and delivers a 3-bit thermometer code (bit k set = above
// threshold k+1). Because the code is thermometric, a conversion starts as
// soon as the first threshold is crossed and the held result keeps climbing
// while the signal rises. The conversion ends at the first of: full scale
// (code 3) reached, the signal falling below the level already held (its
// maximum has passed), or CONV_CYCLES clocks elapsed (the conversion time
// ran out). The result then stays on `code` with `hit` high until `clear`.
//
// Interface and timing: `thresh` is asynchronous and goes through a
// two-flop synchroniser, so a crossing is seen 2 clocks later. A conversion
// starts only on a rising edge of the synchronised first comparator, so a
// signal still above threshold after `clear` does not start a second one.
// `busy` is high while the window is open; `clear` drops a held result, and
// a crossing in the same cycle as `clear` still starts a new conversion.
//
// Following the published design: thermometric flash conversion, start at
// the first threshold, end at the signal maximum or at a time limit, 2-bit
// result. This design's own choices: the synchroniser, the window length
// CONV_CYCLES, detecting the maximum as a drop below the held level, the
// bubble-tolerant encoder (highest set comparator wins), and reset/clear
// to code 0.
module adc_capture
  import pixnn_pkg::*;
#(
  parameter int unsigned CONV_CYCLES = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [THR_BITS-1:0] thresh,
  input  logic                clear,
  output logic                busy,
  output logic                hit,
  output adc_code_t           code
);

  localparam int unsigned CNT_BITS = $clog2(CONV_CYCLES + 1);

  logic [THR_BITS-1:0] sync1, sync2;
  logic                above_q;          // synchronised first comparator, last cycle
  logic [CNT_BITS-1:0] cnt;
  adc_code_t           level;
  logic                start, finish;

  // Highest comparator that fires gives the level.
  always_comb begin
    level = '0;
    for (int unsigned k = 0; k < THR_BITS; k++)
      if (sync2[k]) level = adc_code_t'(k + 1);
  end

  assign start  = !busy && (!hit || clear) && sync2[0] && !above_q;
  assign finish = busy && ((level == adc_code_t'(THR_BITS)) || (level < code) ||
                           (cnt == CNT_BITS'(CONV_CYCLES - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1   <= '0;
      sync2   <= '0;
      above_q <= 1'b0;
      busy    <= 1'b0;
      hit     <= 1'b0;
      code    <= '0;
      cnt     <= '0;
    end else begin
      sync1   <= thresh;
      sync2   <= sync1;
      above_q <= sync2[0];
      if (start) begin
        busy <= 1'b1;
        hit  <= 1'b0;
        code <= level;
        cnt  <= '0;
      end else if (busy) begin
        if (level > code) code <= level;
        cnt <= cnt + 1'b1;
        if (finish) begin
          busy <= 1'b0;
          hit  <= 1'b1;
        end
      end else if (clear) begin
        hit  <= 1'b0;
        code <= '0;
      end
    end
  end

  // A result is never held while its conversion is still running.
  a_hit_not_busy: assert property (@(posedge clk) disable iff (!rst_n) !(hit && busy));
  // The window never outlasts CONV_CYCLES clocks.
  a_window: assert property (@(posedge clk) disable iff (!rst_n)
                             busy |-> cnt < CNT_BITS'(CONV_CYCLES));

endmodule
