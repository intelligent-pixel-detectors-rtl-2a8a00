// tb_nn_dense: checks the dense layer at its first-layer size (16 unsigned
// 6-bit inputs, 58 outputs, 4-bit weights and biases) against an integer
// dot product, with random data and with the extreme corners (all inputs
// 63 times all weights -8 or +7), where an accumulator that is too narrow
// would overflow. A second instance checks the signed-input variant.
module tb_nn_dense;
  localparam int unsigned NI = 16, NO = 58, IB = 6, WB = 4, BB = 4;
  localparam int unsigned AB = IB + WB + $clog2(NI + 1);

  logic [NI-1:0][IB-1:0] x;
  logic [NI*NO*WB-1:0]   w;
  logic [NO*BB-1:0]      b;
  logic [NO-1:0][AB-1:0] y;
  logic [NO-1:0][AB-1:0] ys;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  nn_dense #(.N_IN(NI), .N_OUT(NO), .IN_BITS(IB), .IN_SIGNED(1'b0),
             .W_BITS(WB), .B_BITS(BB), .ACC_BITS(AB)) dut (.x, .w, .b, .y);
  nn_dense #(.N_IN(NI), .N_OUT(NO), .IN_BITS(IB), .IN_SIGNED(1'b1),
             .W_BITS(WB), .B_BITS(BB), .ACC_BITS(AB)) dut_s (.x, .w, .b, .y(ys));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xv[NI], wv[NO][NI], bv[NO];

  task automatic apply_and_check();
    foreach (xv[i]) x[i] = IB'(xv[i]);
    foreach (wv[o, i]) w[(o*NI + i)*WB +: WB] = WB'(wv[o][i]);
    foreach (bv[o]) b[o*BB +: BB] = BB'(bv[o]);
    #1;
    foreach (bv[o]) begin
      int eu, es;
      eu = bv[o];
      es = bv[o];
      foreach (xv[i]) begin
        eu += wv[o][i] * xv[i];
        es += wv[o][i] * (xv[i] >= 32 ? xv[i] - 64 : xv[i]);
      end
      checks += 2;
      if (int'($signed(y[o])) != eu) begin
        failures++;
        $display("FAIL unsigned out %0d: %0d expected %0d", o, $signed(y[o]), eu);
      end
      if (int'($signed(ys[o])) != es) begin
        failures++;
        $display("FAIL signed out %0d: %0d expected %0d", o, $signed(ys[o]), es);
      end
    end
  endtask

  initial begin
    // corners
    foreach (xv[i]) xv[i] = 63;
    foreach (wv[o, i]) wv[o][i] = (o % 2) ? 7 : -8;
    foreach (bv[o]) bv[o] = (o % 2) ? 7 : -8;
    apply_and_check();
    // one hot: weight [o][i] reaches output o only
    foreach (xv[i]) xv[i] = 0;
    xv[5] = 1;
    foreach (wv[o, i]) wv[o][i] = (i == 5) ? (o % 15) - 7 : 3;
    foreach (bv[o]) bv[o] = 0;
    apply_and_check();
    repeat (200) begin
      foreach (xv[i]) xv[i] = int'($urandom_range(63));
      foreach (wv[o, i]) wv[o][i] = int'($urandom_range(15)) - 8;
      foreach (bv[o]) bv[o] = int'($urandom_range(15)) - 8;
      apply_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
