// tb_readout_ctrl: checks the cluster data mover: no transfer while a pixel
// is converting or when nothing is held, exactly one one-clock transfer per
// completed cluster (the modelled pixels drop their hit flags at the edge
// that ends the transfer, as adc_capture does), and the transfer counter.
module tb_readout_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  logic any_hit = 1'b0, any_busy = 1'b0;
  logic fire;
  logic [15:0] n_fired;
  int checks = 0, failures = 0;

  readout_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pixels modelled in the testbench: `hit` falls at the edge that ends `fire`.
  bit held = 0;
  int fires = 0;
  always @(posedge clk) if (rst_n) begin
    if (fire) begin
      held <= 0;
      fires++;
    end
  end
  always_comb any_hit = held;

  task automatic expect_fire(string what, bit exp);
    checks++;
    if (fire !== exp) begin
      failures++;
      $display("FAIL %s: fire=%0b", what, fire);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_fire("idle", 0);
    // cluster converting: some pixels hold, some still busy
    held = 1; any_busy = 1;
    @(negedge clk);
    expect_fire("busy", 0);
    @(negedge clk);
    expect_fire("busy", 0);
    any_busy = 0;
    #1 expect_fire("cluster complete", 1);
    @(negedge clk);
    expect_fire("after transfer", 0);
    repeat (3) @(negedge clk);
    checks++;
    if (fires != 1 || n_fired != 16'd1) begin
      failures++;
      $display("FAIL fired %0d times, counter %0d", fires, n_fired);
    end
    // back-to-back clusters
    for (int k = 0; k < 20; k++) begin
      held = 1;
      any_busy = (k % 2 == 0);
      @(negedge clk);
      any_busy = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (fires != 21 || n_fired != 16'd21) begin
      failures++;
      $display("FAIL after 20 more clusters: fired %0d, counter %0d", fires, n_fired);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
