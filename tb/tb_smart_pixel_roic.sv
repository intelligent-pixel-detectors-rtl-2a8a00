// tb_smart_pixel_roic: end-to-end test of the whole chip at its default
// size (two 256-pixel arrays, 4652-bit weight chain per array, 768-register
// test chain).
//
// 1. Loads a different random weight set into each array through the one
//    daisy-chained configuration port, and checks that the bits loaded
//    before come out of Config Out in order.
// 2. Runs the timing-violation test: pulses sent into the test chain must
//    come out exactly 768 clocks later, also while the arrays are busy.
// 3. Fires random clusters at both arrays at once. Each pixel gets a step
//    or a ramp comparator pattern, up to one clock after its neighbours.
//    The expected code of a pixel is its peak level; the expected y-profile
//    and class come from the integer reference model. Every cluster must
//    give exactly one result per array, with the right profile, scores,
//    class and keep flag.
// 4. Reloads the weights (three rounds, each favouring one class) so that
//    kept and both kinds of rejected clusters occur.
// Mechanisms counted, each must happen at least once: weight load, Config
// Out pass-through, kept cluster, positive and negative low-pT rejects, ADC
// conversion ended at full scale, by its time limit and after the signal
// maximum, staggered pixel start, both arrays classifying in the same clock,
// test-chain pattern seen after 768 clocks.
module tb_smart_pixel_roic;
  import pixnn_pkg::*;
  import pixnn_ref_pkg::*;

  localparam int unsigned NA = 2;
  localparam int unsigned NP = N_ROWS * N_COLS;
  localparam int unsigned CONV = 4;      // the top's default conversion window
  localparam int unsigned TREGS = 768;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NA-1:0][NP-1:0][THR_BITS-1:0] thresh = '0;
  logic cfg_en = 1'b0, cfg_in = 1'b0, cfg_out;
  logic test_en = 1'b0, test_in = 1'b0, test_out;
  logic [NA-1:0] out_valid, keep;
  cls_e [NA-1:0] cls;
  logic [NA-1:0][N_CLS-1:0][O_BITS-1:0] scores;
  row_sum_t [NA-1:0][N_ROWS-1:0] row_sums;
  logic [NA-1:0][15:0] n_clusters;
  int checks = 0, failures = 0;

  smart_pixel_roic dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters
  typedef enum int {
    M_WLOAD, M_CFG_THROUGH, M_KEEP, M_REJ_POS, M_REJ_NEG, M_ADC_FULL,
    M_ADC_TIMEOUT, M_ADC_PEAK, M_STAGGER, M_BOTH_ARRAYS, M_TEST_CHAIN, M_NUM
  } mech_e;
  int mech[M_NUM];
  string mech_name[M_NUM] = '{"weight load", "config out pass-through", "cluster kept",
    "low pT + rejected", "low pT - rejected", "ADC end at full scale", "ADC end at time limit",
    "ADC end after maximum", "staggered pixel start", "both arrays in one clock",
    "test chain 768-clock delay"};

  // ---- result checking, one expected result per array
  result_t exp_r[NA];
  int exp_x[NA][N_ROWS];
  bit pending[NA];
  int n_results[NA];

  always @(negedge clk) if (rst_n) begin
    if (&out_valid) mech[M_BOTH_ARRAYS]++;
    for (int a = 0; a < NA; a++) if (out_valid[a]) begin
      n_results[a]++;
      checks++;
      if (!pending[a]) begin
        failures++;
        $display("FAIL array %0d: result without a cluster", a);
      end
      pending[a] = 0;
      for (int r = 0; r < N_ROWS; r++) begin
        checks++;
        if (int'(row_sums[a][r]) != exp_x[a][r]) begin
          failures++;
          $display("FAIL array %0d row %0d sum %0d expected %0d", a, r, row_sums[a][r], exp_x[a][r]);
        end
      end
      checks++;
      if (int'(cls[a]) != exp_r[a].cls || keep[a] != (exp_r[a].cls == 2)) begin
        failures++;
        $display("FAIL array %0d class %0d expected %0d", a, cls[a], exp_r[a].cls);
      end
      for (int c = 0; c < N_CLS; c++) begin
        checks++;
        if (int'($signed(scores[a][c])) != exp_r[a].scores[c]) begin
          failures++;
          $display("FAIL array %0d score %0d", a, c);
        end
      end
      case (exp_r[a].cls)
        0: mech[M_REJ_POS]++;
        1: mech[M_REJ_NEG]++;
        default: mech[M_KEEP]++;
      endcase
    end
  end

  function automatic logic [THR_BITS-1:0] therm(int lvl);
    return THR_BITS'((1 << lvl) - 1);
  endfunction

  // ---- configuration: the bits for the last array are shifted in first
  logic [CFG_BITS-1:0] loaded[NA];
  bit ever_loaded = 0;

  task automatic load_weights(weights_t w[NA]);
    logic [NA*CFG_BITS-1:0] v;
    logic [NA*CFG_BITS-1:0] prev;
    int mism;
    for (int a = 0; a < NA; a++) begin
      v[(NA-1-a)*CFG_BITS +: CFG_BITS]    = pack(w[a]);
      prev[(NA-1-a)*CFG_BITS +: CFG_BITS] = loaded[a];
    end
    mism = 0;
    cfg_en = 1'b1;
    for (int i = 0; i < NA * CFG_BITS; i++) begin
      if (cfg_out !== prev[i]) mism++;
      cfg_in = v[i];
      @(negedge clk);
    end
    cfg_en = 1'b0;
    checks++;
    if (mism != 0) begin
      failures++;
      $display("FAIL config out: %0d bits differ from the previous image", mism);
    end else if (ever_loaded) mech[M_CFG_THROUGH]++;
    for (int a = 0; a < NA; a++) loaded[a] = v[(NA-1-a)*CFG_BITS +: CFG_BITS];
    ever_loaded = 1;
    mech[M_WLOAD]++;
  endtask

  // ---- one random cluster in array a, or the same one in every array
  task automatic cluster(int a, bit all_arrays, weights_t w[NA]);
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
        off[p] = (r == r0 && c == c0) ? 0 : $urandom_range(1);
        if (off[p] != 0) mech[M_STAGGER]++;
        if ($urandom_range(1)) begin
          for (int k = 0; k < 8; k++) seq[p].push_back(peak);       // step
          if (peak == 3) mech[M_ADC_FULL]++;
          else           mech[M_ADC_TIMEOUT]++;
        end else begin
          for (int l = 1; l <= peak; l++) seq[p].push_back(l);      // ramp up
          for (int l = peak - 1; l >= 1; l--) seq[p].push_back(l);  // and down
          if (peak == 3)      mech[M_ADC_FULL]++;
          else if (peak == 2) mech[M_ADC_PEAK]++;
          else                mech[M_ADC_PEAK]++;                   // 1 then 0
        end
        x[r] += peak;
        if (seq[p].size() + off[p] > len) len = seq[p].size() + off[p];
      end
    for (int b = 0; b < NA; b++) if (all_arrays || b == a) begin
      exp_x[b] = x;
      exp_r[b] = classify(x, w[b]);
      pending[b] = 1;
    end
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      for (int b = 0; b < NA; b++) if (all_arrays || b == a)
        for (int p = 0; p < NP; p++)
          thresh[b][p] = (t >= off[p] && t - off[p] < seq[p].size()) ? therm(seq[p][t - off[p]]) : '0;
    end
    @(negedge clk);
    for (int b = 0; b < NA; b++) if (all_arrays || b == a) thresh[b] = '0;
    repeat (CONV + 10) @(negedge clk);
    for (int b = 0; b < NA; b++) if (all_arrays || b == a) begin
      checks++;
      if (pending[b]) begin
        failures++;
        pending[b] = 0;
        $display("FAIL array %0d: no result for a cluster", b);
      end
    end
  endtask

  // ---- test chain: pulse in, count clocks until it shows at the output
  task automatic test_chain_pulse();
    int t_out;
    test_en = 1'b1;
    test_in = 1'b1;
    @(negedge clk) test_in = 1'b0;
    t_out = -1;
    for (int t = 1; t <= TREGS + 5; t++) begin
      if (test_out && t_out < 0) t_out = t;
      @(negedge clk);
    end
    test_en = 1'b0;
    checks++;
    if (t_out != TREGS) begin
      failures++;
      $display("FAIL test chain delay %0d, expected %0d", t_out, TREGS);
    end else mech[M_TEST_CHAIN]++;
  endtask

  initial begin
    weights_t wt[NA];
    int total;
    foreach (loaded[a]) loaded[a] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      for (int a = 0; a < NA; a++) begin
        wt[a] = random_weights();
        foreach (wt[a].w2[c, o])
          if (c == (round + a) % 3 && wt[a].w2[c][o] < 0 && $urandom_range(3) == 0)
            wt[a].w2[c][o] = -wt[a].w2[c][o] - 1;
      end
      load_weights(wt);
      fork
        test_chain_pulse();
        begin
          repeat (4) cluster(0, 1'b1, wt);       // same cluster in both arrays
          fork
            repeat (8) cluster(0, 1'b0, wt);     // independent clusters
            repeat (8) cluster(1, 1'b0, wt);
          join
        end
      join
    end
    for (int a = 0; a < NA; a++) begin
      checks++;
      if (n_results[a] != 36 || n_clusters[a] != 16'd36) begin
        failures++;
        $display("FAIL array %0d: %0d results, counter %0d, expected 36", a, n_results[a], n_clusters[a]);
      end
    end
    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      $display("mechanism %-28s %0d", mech_name[m], mech[m]);
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL mechanism never happened: %s", mech_name[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
