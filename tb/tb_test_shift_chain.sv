// tb_test_shift_chain: the timing-violation test in simulation. Pulses and a
// random bit stream are sent into the 768-register chain; every bit must
// appear at the output register exactly 768 clocks after it was sent, no
// earlier, and the chain must hold its contents while the enable is low.
module tb_test_shift_chain;
  localparam int unsigned N = 768;

  logic clk = 1'b0, rst_n = 1'b0;
  logic shift_en = 1'b0, sin = 1'b0, sout;
  int checks = 0, failures = 0;

  test_shift_chain dut (.clk, .rst_n, .shift_en, .sin, .sout);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit sent[$];   // model: bits in flight, oldest first

  initial begin
    int first_seen;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    shift_en = 1'b1;
    // a single pulse: measure the delay to the output register
    first_seen = -1;
    for (int t = 0; t < N + 10; t++) begin
      sin = (t == 0);
      @(negedge clk);
      if (sout && first_seen < 0) first_seen = t + 1;
    end
    checks++;
    if (first_seen != N) begin
      failures++;
      $display("FAIL pulse came out after %0d clocks, expected %0d", first_seen, N);
    end
    // random stream; compare with the delayed copy
    for (int i = 0; i < N; i++) sent.push_back(1'b0);
    for (int t = 0; t < 2 * N; t++) begin
      bit b;
      b = 1'($urandom_range(1));
      sin = b;
      sent.push_back(b);
      @(negedge clk);
      void'(sent.pop_front());
      checks++;
      if (sout !== sent[0]) begin
        failures++;
        if (failures < 10) $display("FAIL stream t=%0d", t);
      end
    end
    // hold while disabled
    shift_en = 1'b0;
    begin
      bit held_bit;
      held_bit = sout;
      repeat (50) begin
        sin = ~sin;
        @(negedge clk);
      end
      checks++;
      if (sout !== held_bit) begin
        failures++;
        $display("FAIL chain moved while disabled");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
