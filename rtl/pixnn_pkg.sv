// pixnn_pkg: sizes, number formats and class codes shared by the on-pixel
// momentum classifier.
//
// A 16 x 16 pixel matrix produces one 2-bit ADC code per pixel. Each row of
// 16 codes is summed into a 6-bit value; the 16 row sums (the cluster
// y-profile) feed a fully parallel network Dense(16x58) -> ReLU ->
// Dense(58x3) -> Argmax. Weights and biases are 4-bit two's-complement
// integers, so the weight memory holds 3712 + 232 + 696 + 12 = 4652 bits.
// The matrix size, the ADC and row-sum widths, the layer sizes and the
// weight-memory bit counts are the published ones; the integer number
// formats, accumulator widths and class codes are this design's choices.
package pixnn_pkg;

  localparam int unsigned N_ROWS   = 16;   // rows of the matrix (y-profile length)
  localparam int unsigned N_COLS   = 16;   // pixels summed per row
  localparam int unsigned ADC_BITS = 2;    // flash ADC resolution
  localparam int unsigned THR_BITS = (1 << ADC_BITS) - 1; // comparators per pixel
  localparam int unsigned SUM_BITS = 6;    // row-sum width

  localparam int unsigned N_HID    = 58;   // hidden neurons
  localparam int unsigned N_CLS    = 3;    // output classes
  localparam int unsigned W_BITS   = 4;    // weight width
  localparam int unsigned B_BITS   = 4;    // bias width

  localparam int unsigned W1_BITS  = N_ROWS * N_HID * W_BITS;  // 3712
  localparam int unsigned B1_BITS  = N_HID * B_BITS;           // 232
  localparam int unsigned W2_BITS  = N_HID * N_CLS * W_BITS;   // 696
  localparam int unsigned B2_BITS  = N_CLS * B_BITS;           // 12
  localparam int unsigned CFG_BITS = W1_BITS + B1_BITS + W2_BITS + B2_BITS; // 4652

  // Width of a signed dense-layer accumulator that can never overflow: a
  // product of an IN_BITS input (signed or unsigned) and a signed W_BITS
  // weight fits in IN_BITS + W_BITS bits; the sum of N_IN products and one
  // bias (no wider than a weight) needs clog2(N_IN + 1) more bits.
  function automatic int unsigned acc_bits(int unsigned n_in, int unsigned in_bits,
                                           int unsigned w_bits);
    return in_bits + w_bits + $clog2(n_in + 1);
  endfunction

  localparam int unsigned H_BITS   = acc_bits(N_ROWS, SUM_BITS, W_BITS); // 15, signed
  localparam int unsigned R_BITS   = H_BITS - 1;                         // 14, after ReLU
  localparam int unsigned O_BITS   = acc_bits(N_HID, R_BITS, W_BITS);    // 24, signed

  // Class codes, in the order the three outputs are drawn in the data-flow
  // diagram. The two low-momentum classes are rejected.
  typedef enum logic [1:0] {
    CLS_LOW_POS  = 2'd0,
    CLS_LOW_NEG  = 2'd1,
    CLS_HIGH     = 2'd2
  } cls_e;

  typedef logic [ADC_BITS-1:0] adc_code_t;
  typedef logic [SUM_BITS-1:0] row_sum_t;

endpackage
