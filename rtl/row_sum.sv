// row_sum: the per-row adder (Sigma) in front of the momentum classifier.
//
// It adds the 2-bit ADC codes of the N_PIX pixels of one matrix row. The
// result is that row's entry of the cluster y-profile, the charge profile
// across the rows which carries the track's incident angle and thus its
// transverse momentum. With 16 pixels of at most 3 the sum is at most 48,
// so the published 6-bit output never overflows.
//
// Interface and timing: purely combinational; `pix[i]` is pixel i's code,
// `sum` the row total. The 16-input, 2-bit-in, 6-bit-out adder follows the
// published data flow; making it combinational (no register) is this
// design's choice.
module row_sum
  import pixnn_pkg::*;
#(
  parameter int unsigned N_PIX = N_COLS
) (
  input  adc_code_t [N_PIX-1:0] pix,
  output row_sum_t              sum
);

  initial assert (N_PIX * ((1 << ADC_BITS) - 1) < (1 << SUM_BITS))
    else $error("row_sum: %0d pixels can overflow a %0d-bit sum", N_PIX, SUM_BITS);

  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < N_PIX; i++)
      sum = sum + row_sum_t'(pix[i]);
  end

endmodule
