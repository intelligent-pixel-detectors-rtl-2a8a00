// nn_argmax: index of the largest of N signed scores.
//
// The output layer of the momentum classifier has three scores (positive
// low-pT, negative low-pT, high-pT); their argmax is the 2-bit class. On a
// tie the lower index wins, a choice of this design.
//
// Interface and timing: purely combinational. `x[n]` are two's-complement
// scores, `idx` the winning index.
module nn_argmax #(
  parameter int unsigned N       = 3,
  parameter int unsigned IN_BITS = 24,
  parameter int unsigned IDX_BITS = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][IN_BITS-1:0] x,
  output logic [IDX_BITS-1:0]       idx
);

  always_comb begin
    logic signed [IN_BITS-1:0] best;
    best = $signed(x[0]);
    idx  = '0;
    for (int unsigned n = 1; n < N; n++)
      if ($signed(x[n]) > best) begin
        best = $signed(x[n]);
        idx  = IDX_BITS'(n);
      end
  end

endmodule
