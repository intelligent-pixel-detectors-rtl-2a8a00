// momentum_classifier: on-chip neural network that decides whether a pixel
// cluster came from a high or a low transverse-momentum (pT) track.
//
// Input is the cluster y-profile: 16 row sums of 6 bits. The network is
// Dense(16x58) -> ReLU(58) -> Dense(58x3) -> Argmax(3), fully parallel: every
// multiplication has its own multiplier, nothing is time-multiplexed. The
// three classes are low pT of positive charge, low pT of negative charge
// (both rejected) and high pT (kept for further processing); the two
// charges get separate classes because they leave differently shaped
// clusters in the magnetic field. Weights and biases come from the
// weight_config memory.
//
// Timing: two pipeline stages. Stage 1 registers the 58 ReLU outputs,
// stage 2 registers the class, the keep flag and the three scores. A result
// leaves `out_valid` 2 clocks after `in_valid`, and a new cluster can be
// accepted every clock.
//
// Layer sizes, the ReLU, the argmax, the three classes and the keep/reject
// split follow the published network (the second of three candidate
// models). The integer number formats, the pipeline depth and the class
// codes are this design's choices (see pixnn_pkg).
module momentum_classifier
  import pixnn_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  row_sum_t [N_ROWS-1:0]         row_sums,
  input  logic [W1_BITS-1:0]            w1,
  input  logic [B1_BITS-1:0]            b1,
  input  logic [W2_BITS-1:0]            w2,
  input  logic [B2_BITS-1:0]            b2,
  output logic                          out_valid,
  output cls_e                          cls,
  output logic                          keep,
  output logic [N_CLS-1:0][O_BITS-1:0]  scores
);

  logic [N_HID-1:0][H_BITS-1:0] hid;
  logic [N_HID-1:0][R_BITS-1:0] act, act_q;
  logic [N_CLS-1:0][O_BITS-1:0] out;
  logic [1:0]                   idx;
  logic                         v1_q;

  nn_dense #(
    .N_IN(N_ROWS), .N_OUT(N_HID), .IN_BITS(SUM_BITS), .IN_SIGNED(1'b0),
    .W_BITS(W_BITS), .B_BITS(B_BITS), .ACC_BITS(H_BITS)
  ) u_dense1 (.x(row_sums), .w(w1), .b(b1), .y(hid));

  nn_relu #(.N(N_HID), .IN_BITS(H_BITS)) u_relu (.x(hid), .y(act));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q  <= 1'b0;
      act_q <= '0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) act_q <= act;
    end
  end

  nn_dense #(
    .N_IN(N_HID), .N_OUT(N_CLS), .IN_BITS(R_BITS), .IN_SIGNED(1'b0),
    .W_BITS(W_BITS), .B_BITS(B_BITS), .ACC_BITS(O_BITS)
  ) u_dense2 (.x(act_q), .w(w2), .b(b2), .y(out));

  nn_argmax #(.N(N_CLS), .IN_BITS(O_BITS), .IDX_BITS(2)) u_argmax (.x(out), .idx(idx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cls       <= CLS_LOW_POS;
      keep      <= 1'b0;
      scores    <= '0;
    end else begin
      out_valid <= v1_q;
      if (v1_q) begin
        cls    <= cls_e'(idx);
        keep   <= (cls_e'(idx) == CLS_HIGH);
        scores <= out;
      end
    end
  end

  // Fixed latency: every accepted cluster gives one result 2 clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid |-> ##2 out_valid);
  a_no_spurious: assert property (@(posedge clk) disable iff (!rst_n)
                                  out_valid |-> $past(in_valid, 2));

endmodule
