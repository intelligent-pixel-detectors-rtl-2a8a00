// nn_dense: one fully parallel dense (fully connected) neural-network layer.
//
// y[o] = b[o] + sum over i of w[o][i] * x[i], for all N_OUT outputs at once:
// every one of the N_IN * N_OUT multiplications has its own multiplier, which
// gives the lowest latency at the cost of area. Weights and biases are
// signed W_BITS / B_BITS integers taken from flat vectors, weight w[o][i] at
// bit offset (o*N_IN + i)*W_BITS and bias b[o] at o*B_BITS. Inputs are
// unsigned or signed (IN_SIGNED). The signed accumulator is ACC_BITS wide,
// enough that no sum can overflow, so the layer is exact.
//
// Interface and timing: purely combinational. The network uses it twice:
// Dense 16x58 with 6-bit unsigned row sums and Dense 58x3 with the unsigned
// ReLU outputs, both with 4-bit weights and biases (the 4 bits follow from
// the published weight-memory sizes). The integer number format, the bias
// scale and the bit layout of the weight vector are this design's choices.
module nn_dense #(
  parameter int unsigned N_IN      = 16,
  parameter int unsigned N_OUT     = 58,
  parameter int unsigned IN_BITS   = 6,
  parameter bit          IN_SIGNED = 1'b0,
  parameter int unsigned W_BITS    = 4,
  parameter int unsigned B_BITS    = 4,
  parameter int unsigned ACC_BITS  = IN_BITS + W_BITS + $clog2(N_IN + 1)
) (
  input  logic [N_IN-1:0][IN_BITS-1:0]   x,
  input  logic [N_IN*N_OUT*W_BITS-1:0]   w,
  input  logic [N_OUT*B_BITS-1:0]        b,
  output logic [N_OUT-1:0][ACC_BITS-1:0] y   // two's complement
);

  always_comb begin
    for (int unsigned o = 0; o < N_OUT; o++) begin
      logic signed [ACC_BITS-1:0] acc;
      acc = ACC_BITS'($signed(b[o*B_BITS +: B_BITS]));
      for (int unsigned i = 0; i < N_IN; i++) begin
        logic signed [IN_BITS:0]  xe;
        logic signed [W_BITS-1:0] wi;
        xe  = IN_SIGNED ? {x[i][IN_BITS-1], x[i]} : {1'b0, x[i]};
        wi  = $signed(w[(o*N_IN + i)*W_BITS +: W_BITS]);
        acc = acc + ACC_BITS'(xe * wi);
      end
      y[o] = acc;
    end
  end

endmodule
