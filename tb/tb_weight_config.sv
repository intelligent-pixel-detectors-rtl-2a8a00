// tb_weight_config: loads a random 4652-bit weight image through the serial
// chain (bit 0 first) and checks that w1, b1, w2 and b2 hold exactly their
// slices of it after exactly 4652 shift clocks (one clock fewer leaves them
// misaligned), that the image is held while the enable is low, and that
// shifting in a second image pushes the first out of Config Out bit by bit
// in order, as a daisy chain needs.
module tb_weight_config;
  import pixnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_en = 1'b0, cfg_in = 1'b0, cfg_out;
  logic [W1_BITS-1:0] w1;
  logic [B1_BITS-1:0] b1;
  logic [W2_BITS-1:0] w2;
  logic [B2_BITS-1:0] b2;
  int checks = 0, failures = 0;

  weight_config dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CFG_BITS-1:0] img_a, img_b;

  task automatic check_img(string what, logic [CFG_BITS-1:0] img, bit expect_eq);
    checks++;
    if (((w1 === img[0 +: W1_BITS]) && (b1 === img[W1_BITS +: B1_BITS]) &&
         (w2 === img[W1_BITS+B1_BITS +: W2_BITS]) &&
         (b2 === img[W1_BITS+B1_BITS+W2_BITS +: B2_BITS])) != expect_eq) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < CFG_BITS; i++) begin
      img_a[i] = 1'($urandom_range(1));
      img_b[i] = 1'($urandom_range(1));
    end
    img_a[0] = ~img_a[1];    // so that an off-by-one shift is visible
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_img("reset to zero", '0, 1'b1);

    // shift img_a, bit 0 first, but stop one short
    cfg_en = 1'b1;
    for (int i = 0; i < CFG_BITS; i++) begin
      cfg_in = img_a[i];
      @(negedge clk);
      if (i == CFG_BITS - 2) begin
        cfg_en = 1'b0;
        check_img("one shift short is misaligned", img_a, 1'b0);
        cfg_en = 1'b1;
      end
    end
    cfg_en = 1'b0;
    check_img("image A loaded", img_a, 1'b1);
    cfg_in = ~cfg_in;
    repeat (20) @(negedge clk);
    check_img("image A held", img_a, 1'b1);

    // shift img_b; img_a must come out of cfg_out in order
    cfg_en = 1'b1;
    for (int i = 0; i < CFG_BITS; i++) begin
      checks++;
      if (cfg_out !== img_a[i]) begin
        failures++;
        if (failures < 10) $display("FAIL cfg_out bit %0d", i);
      end
      cfg_in = img_b[i];
      @(negedge clk);
    end
    cfg_en = 1'b0;
    check_img("image B loaded", img_b, 1'b1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
