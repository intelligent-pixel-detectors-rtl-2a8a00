// pixnn_ref_pkg: integer reference model of the momentum classifier for
// the testbenches, written directly from the network's definition
// (Dense 16x58 -> ReLU -> Dense 58x3 -> Argmax, lower index wins a tie)
// with plain ints, independent of the RTL's bit-level arithmetic. It also
// draws random weight sets and packs them into the weight-chain layout
// (w1, b1, w2, b2 from bit 0, weight [o][i] at (o*N_IN + i)*4).
package pixnn_ref_pkg;
  import pixnn_pkg::*;

  typedef struct {
    int w1[N_HID][N_ROWS];
    int b1[N_HID];
    int w2[N_CLS][N_HID];
    int b2[N_CLS];
  } weights_t;

  typedef struct {
    int scores[N_CLS];
    int cls;
  } result_t;

  // Uniform signed 4-bit value in [-8, 7].
  function automatic int rnd4();
    return int'($urandom_range(15)) - 8;
  endfunction

  function automatic weights_t random_weights();
    weights_t w;
    foreach (w.w1[o, i]) w.w1[o][i] = rnd4();
    foreach (w.b1[o])    w.b1[o]    = rnd4();
    foreach (w.w2[o, i]) w.w2[o][i] = rnd4();
    foreach (w.b2[o])    w.b2[o]    = rnd4();
    return w;
  endfunction

  function automatic logic [CFG_BITS-1:0] pack(weights_t w);
    logic [CFG_BITS-1:0] v;
    int base;
    v = '0;
    foreach (w.w1[o, i]) v[(o*N_ROWS + i)*W_BITS +: W_BITS] = W_BITS'(w.w1[o][i]);
    base = W1_BITS;
    foreach (w.b1[o])    v[base + o*B_BITS +: B_BITS] = B_BITS'(w.b1[o]);
    base += B1_BITS;
    foreach (w.w2[o, i]) v[base + (o*N_HID + i)*W_BITS +: W_BITS] = W_BITS'(w.w2[o][i]);
    base += W2_BITS;
    foreach (w.b2[o])    v[base + o*B_BITS +: B_BITS] = B_BITS'(w.b2[o]);
    return v;
  endfunction

  function automatic result_t classify(int x[N_ROWS], weights_t w);
    result_t r;
    int h[N_HID];
    foreach (h[o]) begin
      h[o] = w.b1[o];
      foreach (x[i]) h[o] += w.w1[o][i] * x[i];
      if (h[o] < 0) h[o] = 0;
    end
    foreach (r.scores[c]) begin
      r.scores[c] = w.b2[c];
      foreach (h[o]) r.scores[c] += w.w2[c][o] * h[o];
    end
    r.cls = 0;
    for (int c = 1; c < N_CLS; c++)
      if (r.scores[c] > r.scores[r.cls]) r.cls = c;
    return r;
  endfunction

endpackage
