// tb_pixel_array: one 256-pixel array with its classifier, end to end.
//
// Loads a random weight set through the serial chain, then fires random
// clusters at the matrix: a few adjacent rows and columns, each pixel a
// comparator pattern (a step to its peak level, or a ramp up and down)
// starting up to one clock apart. The expected 2-bit code of every pixel is
// its peak level, so the expected y-profile is the per-row sum of peaks and
// the expected class comes from the integer reference model. Each cluster
// must give exactly one result with that profile, class and keep flag; a
// pixel left uncleared would spoil the next cluster's profile.
module tb_pixel_array;
  import pixnn_pkg::*;
  import pixnn_ref_pkg::*;

  localparam int unsigned NP = N_ROWS * N_COLS;
  localparam int unsigned CONV = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NP-1:0][THR_BITS-1:0] thresh = '0;
  logic cfg_en = 1'b0, cfg_in = 1'b0, cfg_out;
  logic out_valid, keep;
  cls_e cls;
  row_sum_t [N_ROWS-1:0] row_sums;
  logic [N_CLS-1:0][O_BITS-1:0] scores;
  logic [15:0] n_clusters;
  int checks = 0, failures = 0;

  pixel_array #(.CONV_CYCLES(CONV)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_results = 0;
  result_t last_r;
  int last_x[N_ROWS];
  bit pending = 0;
  int seen[N_CLS];

  always @(negedge clk) if (rst_n && out_valid) begin
    n_results++;
    checks++;
    if (!pending) begin
      failures++;
      $display("FAIL result without a cluster");
    end
    pending = 0;
    for (int r = 0; r < N_ROWS; r++) begin
      checks++;
      if (int'(row_sums[r]) != last_x[r]) begin
        failures++;
        $display("FAIL row %0d sum %0d expected %0d", r, row_sums[r], last_x[r]);
      end
    end
    checks++;
    if (int'(cls) != last_r.cls || keep != (last_r.cls == 2)) begin
      failures++;
      $display("FAIL class %0d expected %0d", cls, last_r.cls);
    end
    for (int c = 0; c < N_CLS; c++) begin
      checks++;
      if (int'($signed(scores[c])) != last_r.scores[c]) begin
        failures++;
        $display("FAIL score %0d", c);
      end
    end
    seen[last_r.cls]++;
  end

  function automatic logic [THR_BITS-1:0] therm(int lvl);
    return THR_BITS'((1 << lvl) - 1);
  endfunction

  task automatic load_weights(weights_t w);
    logic [CFG_BITS-1:0] v;
    v = pack(w);
    cfg_en = 1'b1;
    for (int i = 0; i < CFG_BITS; i++) begin
      cfg_in = v[i];
      @(negedge clk);
    end
    cfg_en = 1'b0;
  endtask

  // One random cluster; returns the expected y-profile.
  task automatic cluster(weights_t w);
    int seq[NP][$];
    int off[NP];
    int x[N_ROWS];
    int r0, c0, nr, nc, len;
    foreach (x[r]) x[r] = 0;
    foreach (off[p]) off[p] = 0;
    r0 = $urandom_range(N_ROWS - 1);
    c0 = $urandom_range(N_COLS - 1);
    nr = $urandom_range(6, 1);
    nc = $urandom_range(3, 1);
    len = 0;
    for (int r = r0; r < r0 + nr && r < N_ROWS; r++)
      for (int c = c0; c < c0 + nc && c < N_COLS; c++) begin
        int p, peak;
        p = r * N_COLS + c;
        peak = $urandom_range(3, 1);
        off[p] = $urandom_range(1);
        if ($urandom_range(1)) begin
          for (int k = 0; k < 8; k++) seq[p].push_back(peak);       // step
        end else begin
          for (int l = 1; l <= peak; l++) seq[p].push_back(l);      // ramp up
          for (int l = peak - 1; l >= 1; l--) seq[p].push_back(l);  // and down
        end
        x[r] += peak;
        if (seq[p].size() + off[p] > len) len = seq[p].size() + off[p];
      end
    last_x = x;
    last_r = classify(x, w);
    pending = 1;
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++)
        thresh[p] = (t >= off[p] && t - off[p] < seq[p].size()) ? therm(seq[p][t - off[p]]) : '0;
    end
    @(negedge clk) thresh = '0;
    repeat (CONV + 10) @(negedge clk);
    checks++;
    if (pending) begin
      failures++;
      pending = 0;
      $display("FAIL no result for a cluster");
    end
  endtask

  initial begin
    weights_t wt;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int set = 0; set < 3; set++) begin
      wt = random_weights();
      foreach (wt.w2[c, o]) if (c == set && wt.w2[c][o] < 0 && $urandom_range(3) == 0) wt.w2[c][o] = -wt.w2[c][o] - 1;
      load_weights(wt);
      repeat (15) cluster(wt);
    end
    checks++;
    if (n_results != 45 || n_clusters != 16'd45) begin
      failures++;
      $display("FAIL %0d results, counter %0d, expected 45", n_results, n_clusters);
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
