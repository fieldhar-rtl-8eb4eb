// har_ref_pkg: integer reference model of the network for the testbenches.
//
// Written independently of the RTL engines from the network definition:
// per branch three 'valid' 1-D convolutions (K = 3 taps, F = 4 filters,
// stride 1, ReLU) and a global max pooling, the concatenated 16 features,
// dense 16->16 with ReLU, dense 16->10 and the arg-max (first maximum).
// Fixed point: products of Q1.10 values summed exactly, then shifted right
// arithmetically by 10 and saturated to 11 bits. Weights come from
// har_pkg::weight_init with the layouts (c*K + k)*F + f (conv) and o*nin + i
// (dense).
package har_ref_pkg;
  import har_pkg::*;

  typedef int mat_t [WIN][MAX_CH];

  function automatic int q(longint a, int sh, bit relu);
    longint v = a >>> sh;
    if (relu && v < 0) v = 0;
    if (v > 1023) v = 1023;
    if (v < -1024) v = -1024;
    return int'(v);
  endfunction

  // y[t][f] for t < tin - K + 1
  function automatic mat_t conv(mat_t x, int tin, int cin, int w_base);
    mat_t y;
    foreach (y[t, c]) y[t][c] = 0;
    for (int t = 0; t < tin - K + 1; t++)
      for (int f = 0; f < F; f++) begin
        longint acc = 0;
        for (int c = 0; c < cin; c++)
          for (int k = 0; k < K; k++)
            acc += longint'(x[t + k][c]) * longint'(weight_init(w_base + (c * K + k) * F + f));
        y[t][f] = q(acc, QSHIFT, 1'b1);
      end
    return y;
  endfunction

  // full inference on the RAM image ram (row r, channel j at r*TOTAL_CH + j),
  // window starting at row row0; returns the label, gives the 16 pooled
  // features, the hidden layer and the output accumulators
  function automatic int infer(int ram [SR_DEPTH], int row0, output int feat [NFEAT],
                               output int hid [HID], output longint logit [NCLASS]);
    int best = 0;
    for (int b = 0; b < NUM_SENSORS; b++) begin
      mat_t x;
      foreach (x[t, c]) x[t][c] = 0;
      for (int t = 0; t < WIN; t++)
        for (int c = 0; c < sensor_ch(b); c++)
          x[t][c] = ram[((row0 + t) % WIN) * TOTAL_CH + sensor_ch_off(b) + c];
      x = conv(x, WIN, sensor_ch(b), conv_w_base(b, 0));
      x = conv(x, WIN - 2, F, conv_w_base(b, 1));
      x = conv(x, WIN - 4, F, conv_w_base(b, 2));
      for (int f = 0; f < F; f++) begin
        int m = x[0][f];
        for (int t = 1; t < WIN - 6; t++) if (x[t][f] > m) m = x[t][f];
        feat[F * b + f] = m;
      end
    end
    for (int o = 0; o < HID; o++) begin
      longint acc = 0;
      for (int i = 0; i < NFEAT; i++) acc += longint'(feat[i]) * weight_init(DENSE1_W + o * NFEAT + i);
      hid[o] = q(acc, QSHIFT, 1'b1);
    end
    for (int o = 0; o < NCLASS; o++) begin
      longint acc = 0;
      for (int i = 0; i < HID; i++) acc += longint'(hid[i]) * weight_init(DENSE2_W + o * HID + i);
      logit[o] = acc;
      if (acc > logit[best]) best = o;
    end
    return best;
  endfunction
endpackage
