// tb_momentum_classifier: runs random y-profiles through the full network
// with random 4-bit weight sets and compares class, keep flag and the three
// scores with the integer reference model. Inputs arrive back-to-back or
// with gaps; every result must appear exactly 2 clocks after its input
// (one result per clock at full rate). All three classes must occur.
module tb_momentum_classifier;
  import pixnn_pkg::*;
  import pixnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  row_sum_t [N_ROWS-1:0] row_sums;
  logic [W1_BITS-1:0] w1;
  logic [B1_BITS-1:0] b1;
  logic [W2_BITS-1:0] w2;
  logic [B2_BITS-1:0] b2;
  logic out_valid, keep;
  cls_e cls;
  logic [N_CLS-1:0][O_BITS-1:0] scores;
  int checks = 0, failures = 0;

  momentum_classifier dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { result_t r; int t_in; } exp_t;
  exp_t expq[$];
  int cycle = 0;
  int seen[N_CLS];
  weights_t wt;

  always @(posedge clk) cycle <= cycle + 1;

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected result");
    end else begin
      e = expq.pop_front();
      if (cycle - e.t_in != 2) begin
        failures++;
        $display("FAIL latency %0d", cycle - e.t_in);
      end
      checks++;
      if (int'(cls) != e.r.cls || keep != (e.r.cls == 2)) begin
        failures++;
        $display("FAIL class %0d keep %0b expected %0d", cls, keep, e.r.cls);
      end
      for (int c = 0; c < N_CLS; c++) begin
        checks++;
        if (int'($signed(scores[c])) != e.r.scores[c]) begin
          failures++;
          $display("FAIL score %0d: %0d expected %0d", c, $signed(scores[c]), e.r.scores[c]);
        end
      end
      seen[e.r.cls]++;
    end
  end

  task automatic load(weights_t w);
    logic [CFG_BITS-1:0] v;
    v = pack(w);
    {b2, w2, b1, w1} = v;
  endtask

  initial begin
    int x[N_ROWS];
    load(random_weights());
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int set = 0; set < 8; set++) begin
      wt = random_weights();
      // bias the weights of one class upward so that every class wins sometimes
      foreach (wt.w2[c, o]) if (c == set % 3 && wt.w2[c][o] < 0) wt.w2[c][o] = -wt.w2[c][o] - 1;
      @(negedge clk);
      load(wt);
      for (int k = 0; k < 60; k++) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        foreach (x[i]) begin
          // cluster-like profiles: a few adjacent non-empty rows
          x[i] = ($urandom_range(2) == 0) ? 0 : int'($urandom_range(48));
          row_sums[i] = SUM_BITS'(x[i]);
        end
        if (in_valid) expq.push_back('{classify(x, wt), cycle});
      end
      @(negedge clk) in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    // saturated corner: all rows 48, weights at the extremes
    foreach (wt.w1[o, i]) wt.w1[o][i] = 7;
    foreach (wt.b1[o]) wt.b1[o] = 7;
    foreach (wt.w2[c, o]) wt.w2[c][o] = (c == 2) ? 7 : -8;
    foreach (wt.b2[c]) wt.b2[c] = 7;
    load(wt);
    foreach (x[i]) begin x[i] = 63; row_sums[i] = 6'd63; end
    in_valid = 1'b1;
    expq.push_back('{classify(x, wt), cycle});
    @(negedge clk) in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    foreach (seen[c]) begin
      checks++;
      if (seen[c] == 0) begin
        failures++;
        $display("FAIL class %0d never produced", c);
      end
    end
    $display("classes seen: %0d %0d %0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
