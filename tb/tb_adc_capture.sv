// tb_adc_capture: self-checking test of the pixel ADC capture logic.
//
// Drives thermometer comparator patterns (as the analog island would) and
// checks the held 2-bit code, the hit flag, the length of the conversion
// window (CONV_CYCLES clocks when nothing ends it early), early ends at full
// scale and after the signal maximum, that `clear` drops the result and that
// a signal still above threshold after `clear` does not start again.
// Expected values are worked out by hand from the thermometer sequence.
module tb_adc_capture;
  import pixnn_pkg::*;

  localparam int unsigned CONV = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [THR_BITS-1:0] thresh = '0;
  logic clear = 1'b0;
  logic busy, hit;
  adc_code_t code;
  int checks = 0, failures = 0;

  adc_capture #(.CONV_CYCLES(CONV)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic logic [THR_BITS-1:0] therm(int lvl);
    return THR_BITS'((1 << lvl) - 1);
  endfunction

  // Apply a sequence of levels, one per clock, then hold the last one.
  // Returns the number of clocks busy was high.
  task automatic run(input int lv[$], output int busy_cycles);
    busy_cycles = 0;
    foreach (lv[i]) begin
      @(negedge clk) thresh = therm(lv[i]);
      if (busy) busy_cycles++;
    end
    repeat (CONV + 6) begin
      @(negedge clk);
      if (busy) busy_cycles++;
    end
  endtask

  task automatic do_clear();
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
  endtask

  int bc;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("idle hit", hit, 0);
    check("idle code", code, 0);

    // 1: level 1 held: full window of CONV cycles, code 1.
    run('{1}, bc);
    check("t1 window", bc, CONV);
    check("t1 hit", hit, 1);
    check("t1 code", code, 1);
    // still above threshold: clearing must not start a new conversion
    do_clear();
    repeat (6) @(negedge clk);
    check("t1 no retrigger busy", busy, 0);
    check("t1 cleared hit", hit, 0);
    check("t1 cleared code", code, 0);
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 2: rising 1,2 then hold 2: window runs out, code 2.
    run('{1, 2}, bc);
    check("t2 window", bc, CONV);
    check("t2 code", code, 2);
    do_clear();
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 3: 1,2,3: the start takes level 1; the window then sees 2 and 3 and
    // ends at full scale after 2 cycles.
    run('{1, 2, 3}, bc);
    check("t3 window", bc, 2);
    check("t3 code", code, 3);
    do_clear();
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 4: 2 then back to 1: maximum passed, ends in the first window cycle.
    run('{2, 1}, bc);
    check("t4 window", bc, 1);
    check("t4 code", code, 2);
    do_clear();
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 5: straight to full scale: ends one cycle after the start.
    run('{3}, bc);
    check("t5 window", bc, 1);
    check("t5 code", code, 3);
    // 6: a new pulse while a result is still held is ignored until clear.
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);
    run('{1}, bc);
    check("t6 held, no conversion", bc, 0);
    check("t6 held code", code, 3);
    do_clear();
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 7: slow rise: the start and the CONV window cycles all see level 1,
    // so the window closes before level 2 arrives.
    run('{1, 1, 1, 1, 1, 2}, bc);
    check("t7 window", bc, CONV);
    check("t7 code", code, 1);
    do_clear();
    @(negedge clk) thresh = '0;
    repeat (4) @(negedge clk);

    // 8: reset clears a held result.
    run('{2}, bc);
    check("t8 code before reset", code, 2);
    rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    check("t8 hit after reset", hit, 0);
    check("t8 code after reset", code, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
