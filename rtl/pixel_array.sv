// pixel_array: one 32x8 pixel array with its own momentum classifier.
//
// The array's 256 pixels (16x4 super pixels of 2x2 pixels on silicon) are
// seen by the classifier as a 16 x 16 matrix: pixel p belongs to matrix row
// p / 16. Each pixel has an adc_capture turning its comparator outputs into
// a 2-bit code; each row's 16 codes are summed (row_sum) into the 6-bit
// y-profile entry. When a cluster has finished converting, readout_ctrl
// moves the 16 row sums into the momentum_classifier and clears the pixels.
// The classifier's weights come from this array's weight_config chain.
//
// Interface and timing: `thresh[p]` are pixel p's three comparator outputs
// (asynchronous). A cluster is classified CONV_CYCLES + a few clocks after
// its last pixel crosses threshold; `out_valid` then pulses once, 2 clocks
// after the transfer, with the class, the keep flag, the three class scores
// and the y-profile (`row_sums`) of that cluster, so
// that a kept cluster can be passed on. `cfg_*` is the weight chain.
//
// The 256 pixels, 2-bit codes, 16 row sums of 6 bits, the classifier and
// its weight memory follow the published design. The mapping from the
// physical 32x8 layout to the 16x16 matrix, the cluster trigger and the
// exported y-profile are this design's choices.
module pixel_array
  import pixnn_pkg::*;
#(
  parameter int unsigned CONV_CYCLES = 4
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [N_ROWS*N_COLS-1:0][THR_BITS-1:0] thresh,
  input  logic                                 cfg_en,
  input  logic                                 cfg_in,
  output logic                                 cfg_out,
  output logic                                 out_valid,
  output cls_e                                 cls,
  output logic                                 keep,
  output row_sum_t [N_ROWS-1:0]                row_sums,
  output logic [N_CLS-1:0][O_BITS-1:0]         scores,
  output logic [15:0]                          n_clusters
);

  localparam int unsigned N_PIX = N_ROWS * N_COLS;

  logic [N_PIX-1:0]            busy, hit;
  adc_code_t [N_PIX-1:0]       code;
  row_sum_t [N_ROWS-1:0]       sums;
  row_sum_t [N_ROWS-1:0]       sums_q;
  logic                        v1_q;
  logic                        fire;
  logic [W1_BITS-1:0]          w1;
  logic [B1_BITS-1:0]          b1;
  logic [W2_BITS-1:0]          w2;
  logic [B2_BITS-1:0]          b2;

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    adc_capture #(.CONV_CYCLES(CONV_CYCLES)) u_adc (
      .clk, .rst_n, .thresh(thresh[p]), .clear(fire),
      .busy(busy[p]), .hit(hit[p]), .code(code[p])
    );
  end

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    row_sum #(.N_PIX(N_COLS)) u_sum (.pix(code[r*N_COLS +: N_COLS]), .sum(sums[r]));
  end

  readout_ctrl u_ctrl (
    .clk, .rst_n, .any_hit(|hit), .any_busy(|busy), .fire, .n_fired(n_clusters)
  );

  weight_config u_wcfg (
    .clk, .rst_n, .cfg_en, .cfg_in, .cfg_out, .w1, .b1, .w2, .b2
  );

  // Delayed fire: the cycle in which the classifier's first stage is valid.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1_q <= 1'b0;
    else        v1_q <= fire;

  momentum_classifier u_nn (
    .clk, .rst_n, .in_valid(fire), .row_sums(sums),
    .w1, .b1, .w2, .b2, .out_valid, .cls, .keep, .scores
  );

  // Carry the y-profile alongside the classifier's two pipeline stages, so
  // it is on `row_sums` together with the class and held until the next one.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sums_q   <= '0;
      row_sums <= '0;
    end else begin
      if (fire)       sums_q   <= sums;
      if (v1_q)       row_sums <= sums_q;
    end
  end

endmodule
