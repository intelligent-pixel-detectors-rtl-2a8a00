// tb_row_sum: checks the 16-pixel row adder against an integer sum, for
// all-zero and all-full-scale rows (0 and 48, the 6-bit maximum used) and
// for random rows.
module tb_row_sum;
  import pixnn_pkg::*;

  adc_code_t [N_COLS-1:0] pix;
  row_sum_t               sum;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  row_sum dut (.pix, .sum);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check(int exp);
    #1;
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      $display("FAIL pix=%h sum=%0d expected %0d", pix, sum, exp);
    end
  endtask

  initial begin
    int exp;
    pix = '0;
    apply_and_check(0);
    pix = '1;
    apply_and_check(48);
    for (int k = 0; k < 16; k++) begin   // one pixel at a time
      pix = '0;
      pix[k] = 2'(k % 3 + 1);
      apply_and_check(k % 3 + 1);
    end
    repeat (500) begin
      exp = 0;
      for (int i = 0; i < N_COLS; i++) begin
        pix[i] = 2'($urandom_range(3));
        exp += int'(pix[i]);
      end
      apply_and_check(exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
