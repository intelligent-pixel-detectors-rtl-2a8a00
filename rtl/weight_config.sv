// weight_config: reconfigurable weight and bias memory of one classifier.
//
// All network parameters are held in flip-flops that form one serial chain
// from `cfg_in` (Config In) to `cfg_out` (Config Out). While `cfg_en` is
// high the chain shifts by one bit per clock, towards `cfg_out`; with
// `cfg_en` low it holds. Chains of several classifiers can be daisy-chained
// by feeding one `cfg_out` into the next `cfg_in`.
//
// Layout, counted from the `cfg_out` end (bit 0): w1 (3712 bits), b1 (232),
// w2 (696), b2 (12), TOTAL_BITS = 4652. The first bit shifted in therefore
// lands in bit 0 of w1 after TOTAL_BITS shifts; to load a vector V, shift
// V[0] first and V[TOTAL_BITS-1] last.
//
// The four field sizes and the Config In / Config Out chain ends follow the
// published data flow; the flip-flop chain, the bit order, the enable and
// reset to all zeros are this design's choices.
module weight_config
  import pixnn_pkg::*;
#(
  parameter int unsigned W1_N = W1_BITS,
  parameter int unsigned B1_N = B1_BITS,
  parameter int unsigned W2_N = W2_BITS,
  parameter int unsigned B2_N = B2_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_en,
  input  logic            cfg_in,
  output logic            cfg_out,
  output logic [W1_N-1:0] w1,
  output logic [B1_N-1:0] b1,
  output logic [W2_N-1:0] w2,
  output logic [B2_N-1:0] b2
);

  localparam int unsigned TOTAL_BITS = W1_N + B1_N + W2_N + B2_N;

  logic [TOTAL_BITS-1:0] chain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      chain <= '0;
    else if (cfg_en) chain <= {cfg_in, chain[TOTAL_BITS-1:1]};
  end

  assign cfg_out = chain[0];
  assign {b2, w2, b1, w1} = chain;

endmodule
