// smart_pixel_roic: digital top of the smart-pixel readout chip.
//
// The chip holds N_ARRAYS pixel arrays of 32x8 pixels, each with its own
// neural-network momentum classifier that reads the array's clusters and
// flags each one as kept (high pT, to be read out) or rejected (low pT).
// The arrays' weight memories form one serial configuration chain: `cfg_in`
// enters array 0, array 0's end feeds array 1, and the last array's end is
// `cfg_out`. Loading the whole chip takes N_ARRAYS * 4652 shift clocks; the
// bits for the last array are shifted in first. A separate 768-register
// test chain (`test_in` to `test_out`) checks the chip for timing
// violations: a pattern sent in comes out 768 clocks later.
//
// Interface and timing: `thresh[a][p]` are the three comparator outputs of
// pixel p of array a, from the analog islands (asynchronous). For each
// array, `out_valid[a]` pulses once per cluster, with `cls[a]`, `keep[a]`,
// `scores[a]` and `row_sums[a]` valid in that cycle and held after it.
//
// Two arrays per chip, 256 pixels each, per-array classifiers, the weight
// memory with Config In/Out and the 768-register chain follow the published
// chip. Daisy-chaining the two weight chains and the separate test chain
// are this design's choices.
module smart_pixel_roic
  import pixnn_pkg::*;
#(
  parameter int unsigned N_ARRAYS    = 2,
  parameter int unsigned TEST_REGS   = 768,
  parameter int unsigned CONV_CYCLES = 4
) (
  input  logic                                                 clk,
  input  logic                                                 rst_n,
  input  logic [N_ARRAYS-1:0][N_ROWS*N_COLS-1:0][THR_BITS-1:0] thresh,
  input  logic                                                 cfg_en,
  input  logic                                                 cfg_in,
  output logic                                                 cfg_out,
  input  logic                                                 test_en,
  input  logic                                                 test_in,
  output logic                                                 test_out,
  output logic [N_ARRAYS-1:0]                                  out_valid,
  output cls_e [N_ARRAYS-1:0]                                  cls,
  output logic [N_ARRAYS-1:0]                                  keep,
  output logic [N_ARRAYS-1:0][N_CLS-1:0][O_BITS-1:0]           scores,
  output row_sum_t [N_ARRAYS-1:0][N_ROWS-1:0]                  row_sums,
  output logic [N_ARRAYS-1:0][15:0]                            n_clusters
);

  logic [N_ARRAYS:0] cfg_link;

  assign cfg_link[0] = cfg_in;
  assign cfg_out     = cfg_link[N_ARRAYS];

  for (genvar a = 0; a < N_ARRAYS; a++) begin : g_arr
    pixel_array #(.CONV_CYCLES(CONV_CYCLES)) u_array (
      .clk, .rst_n,
      .thresh     (thresh[a]),
      .cfg_en,
      .cfg_in     (cfg_link[a]),
      .cfg_out    (cfg_link[a+1]),
      .out_valid  (out_valid[a]),
      .cls        (cls[a]),
      .keep       (keep[a]),
      .scores     (scores[a]),
      .row_sums   (row_sums[a]),
      .n_clusters (n_clusters[a])
    );
  end

  test_shift_chain #(.N_REGS(TEST_REGS)) u_test_chain (
    .clk, .rst_n, .shift_en(test_en), .sin(test_in), .sout(test_out)
  );

endmodule
