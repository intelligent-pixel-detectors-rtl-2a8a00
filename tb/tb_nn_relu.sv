// tb_nn_relu: checks the 58-lane ReLU: negative values become 0, zero and
// positive values (including the largest) pass unchanged.
module tb_nn_relu;
  localparam int unsigned N = 58, B = 15;

  logic [N-1:0][B-1:0]   x;
  logic [N-1:0][B-2:0]   y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  nn_relu #(.N(N), .IN_BITS(B)) dut (.x, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[N];
    repeat (200) begin
      foreach (v[n]) begin
        case ($urandom_range(5))
          0: v[n] = -(1 << (B-1));          // most negative
          1: v[n] = (1 << (B-1)) - 1;       // most positive
          2: v[n] = 0;
          3: v[n] = -1;
          default: v[n] = int'($urandom_range((1 << B) - 1)) - (1 << (B-1));
        endcase
        x[n] = B'(v[n]);
      end
      #1;
      foreach (v[n]) begin
        checks++;
        if (int'(y[n]) != (v[n] < 0 ? 0 : v[n])) begin
          failures++;
          $display("FAIL lane %0d: x=%0d y=%0d", n, v[n], y[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
