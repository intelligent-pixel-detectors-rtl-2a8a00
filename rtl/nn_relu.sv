// nn_relu: rectified linear unit on a vector of signed values.
//
// Negative inputs become 0, others pass unchanged. Since the result is never
// negative, the sign bit is dropped: a signed IN_BITS input gives an
// unsigned IN_BITS-1 output, with no loss of precision (no requantisation
// to a narrower format, which is this design's choice; the published design
// only places a 58-wide ReLU between the two dense layers).
//
// Interface and timing: purely combinational, N independent lanes.
module nn_relu #(
  parameter int unsigned N       = 58,
  parameter int unsigned IN_BITS = 15
) (
  input  logic [N-1:0][IN_BITS-1:0] x,   // two's complement
  output logic [N-1:0][IN_BITS-2:0] y    // unsigned
);

  always_comb
    for (int unsigned n = 0; n < N; n++)
      y[n] = x[n][IN_BITS-1] ? '0 : x[n][IN_BITS-2:0];

endmodule
