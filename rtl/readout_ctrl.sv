// readout_ctrl: data mover that hands each cluster of a pixel array to its
// classifier.
//
// A cluster is complete once at least one pixel holds an ADC result
// (`any_hit`) and no pixel is still converting (`any_busy` low). Then
// `fire` is high for one clock: the array presents its row sums to the
// classifier as a valid input and clears every pixel's held result at the
// same clock edge, so `any_hit` is low in the next clock and each cluster is
// moved exactly once. Pixels that cross threshold later than one conversion
// window after the others form a cluster of their own. `n_fired` counts
// the clusters moved (wrapping around).
//
// Interface and timing: `fire` is combinational from the two flags; the
// counter updates at the clock edge that ends the `fire` cycle.
//
// The published design only names its "data movers"; this trigger rule is
// this design's own, the simplest one that moves every cluster once.
module readout_ctrl #(
  parameter int unsigned CNT_BITS = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                any_hit,
  input  logic                any_busy,
  output logic                fire,
  output logic [CNT_BITS-1:0] n_fired
);

  assign fire = any_hit && !any_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    n_fired <= '0;
    else if (fire) n_fired <= n_fired + 1'b1;
  end

  // A cluster is never moved while one of its pixels is still converting.
  a_no_fire_busy: assert property (@(posedge clk) disable iff (!rst_n) !(fire && any_busy));

endmodule
