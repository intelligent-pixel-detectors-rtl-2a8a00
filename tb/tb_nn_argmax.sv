// tb_nn_argmax: checks the 3-way argmax on random signed scores, on
// extreme values and on ties (the lower index must win).
module tb_nn_argmax;
  localparam int unsigned N = 3, B = 24;

  logic [N-1:0][B-1:0] x;
  logic [1:0]          idx;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  nn_argmax #(.N(N), .IN_BITS(B), .IDX_BITS(2)) dut (.x, .idx);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int a, int b, int c);
    int v[3];
    int best;
    v = '{a, b, c};
    foreach (v[n]) x[n] = B'(v[n]);
    best = 0;
    if (v[1] > v[best]) best = 1;
    if (v[2] > v[best]) best = 2;
    #1;
    checks++;
    if (int'(idx) != best) begin
      failures++;
      $display("FAIL %0d %0d %0d: idx=%0d expected %0d", a, b, c, idx, best);
    end
  endtask

  initial begin
    try(0, 0, 0);            // full tie
    try(5, 5, 1);            // tie of 0 and 1
    try(-3, 7, 7);           // tie of 1 and 2
    try(-8388608, -8388608, -8388607);
    try(8388607, -1, 8388606);
    try(-1, -2, -3);
    try(-3, -2, -1);
    repeat (1000) begin
      int r[3];
      foreach (r[n]) r[n] = ($urandom_range(3) == 0) ? int'($urandom_range(4)) - 2
                                                     : int'($urandom_range(16777215)) - 8388608;
      try(r[0], r[1], r[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
