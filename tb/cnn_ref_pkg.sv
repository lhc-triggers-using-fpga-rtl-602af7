// cnn_ref_pkg: plain integer reference model of the trigger's arithmetic, used
// by the testbenches to work out expected values independently of the RTL.
//
// Formats: activations are integers with 10 fractional bits (1.0 = 1024) held
// in [-32768, 32767]; hidden weights and biases have 6 fractional bits, output
// weights and bias 10. A layer result is floor(sum / 2^wf), ReLU if asked,
// then saturated. Arrays are flat dynamic arrays: feature maps in (h, w, c)
// order, conv kernels in (f, ky, kx, c) order, dense weights in (o, i) order.
package cnn_ref_pkg;

  function automatic int ref_requant(longint acc, int shift, bit relu);
    longint v;
    v = acc >>> shift;
    if (relu && v < 0) v = 0;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  // Valid 2D convolution with bias and ReLU.
  function automatic void ref_conv(input int in[], input int H, input int W, input int C,
                                   input int w[], input int b[], input int K, input int S,
                                   input int F, output int out[]);
    int OH, OW;
    OH = (H - K) / S + 1;
    OW = (W - K) / S + 1;
    out = new[OH * OW * F];
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++)
        for (int f = 0; f < F; f++) begin
          longint acc;
          acc = longint'(b[f]) * 1024;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int c = 0; c < C; c++)
                acc += longint'(in[((oy * S + ky) * W + ox * S + kx) * C + c]) *
                       longint'(w[((f * K + ky) * K + kx) * C + c]);
          out[(oy * OW + ox) * F + f] = ref_requant(acc, 6, 1'b1);
        end
  endfunction

  function automatic void ref_dense(input int in[], input int NI, input int NO,
                                    input int w[], input int b[], input int wf,
                                    input bit relu, output int out[]);
    out = new[NO];
    for (int o = 0; o < NO; o++) begin
      longint acc;
      acc = longint'(b[o]) * 1024;
      for (int i = 0; i < NI; i++) acc += longint'(in[i]) * longint'(w[o * NI + i]);
      out[o] = ref_requant(acc, wf, relu);
    end
  endfunction

  function automatic real ref_sigmoid(int x);
    return 1.0 / (1.0 + $exp(-real'(x) / 1024.0));
  endfunction

  // Sign-extend the low 8 bits or all 16 bits of a parameter word.
  function automatic int s8(int v);
    return (v & 8'h80) != 0 ? (v & 8'hff) - 256 : (v & 8'hff);
  endfunction
  function automatic int s16(int v);
    return (v & 16'h8000) != 0 ? (v & 16'hffff) - 65536 : (v & 16'hffff);
  endfunction

  // Whole network on a padded image of size P with first-conv kernel K1,
  // stride S1 and F1 filters; params in the store's order. Returns the logit.
  // relu_hits counts activations a ReLU set to zero.
  function automatic int ref_network(input int img[], input int P, input int K1,
                                     input int S1, input int F1, input int prm[],
                                     inout int relu_hits);
    int c1[], c2[], d1[], d2[], d3[], o[];
    int w[], b[];
    int idx, C1, C2, NF;
    C1 = (P - K1) / S1 + 1;
    C2 = C1 - 2;
    NF = C2 * C2;
    idx = 0;
    w = new[F1 * K1 * K1]; foreach (w[i]) w[i] = s8(prm[idx++]);
    b = new[F1];           foreach (b[i]) b[i] = s8(prm[idx++]);
    ref_conv(img, P, P, 1, w, b, K1, S1, F1, c1);
    w = new[9 * F1];       foreach (w[i]) w[i] = s8(prm[idx++]);
    b = new[1];            b[0] = s8(prm[idx++]);
    ref_conv(c1, C1, C1, F1, w, b, 3, 1, 1, c2);
    w = new[32 * NF];      foreach (w[i]) w[i] = s8(prm[idx++]);
    b = new[32];           foreach (b[i]) b[i] = s8(prm[idx++]);
    ref_dense(c2, NF, 32, w, b, 6, 1'b1, d1);
    w = new[16 * 32];      foreach (w[i]) w[i] = s8(prm[idx++]);
    b = new[16];           foreach (b[i]) b[i] = s8(prm[idx++]);
    ref_dense(d1, 32, 16, w, b, 6, 1'b1, d2);
    w = new[8 * 16];       foreach (w[i]) w[i] = s8(prm[idx++]);
    b = new[8];            foreach (b[i]) b[i] = s8(prm[idx++]);
    ref_dense(d2, 16, 8, w, b, 6, 1'b1, d3);
    w = new[8];            foreach (w[i]) w[i] = s16(prm[idx++]);
    b = new[1];            b[0] = s16(prm[idx++]);
    ref_dense(d3, 8, 1, w, b, 10, 1'b0, o);
    foreach (c1[i]) if (c1[i] == 0) relu_hits++;
    foreach (d1[i]) if (d1[i] == 0) relu_hits++;
    return o[0];
  endfunction

  // Phi wrap / eta zero padding of an n x n image (rows = eta) by pad.
  function automatic void ref_pad(input int img[], input int n, input int pad, output int out[]);
    int P;
    P = n + 2 * pad;
    out = new[P * P];
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++)
        out[r * P + c] = (r < pad || r >= pad + n) ? 0 : img[(r - pad) * n + (c - pad + n) % n];
  endfunction

  // Random parameter set of n words in the store's layout: 8-bit values kept
  // within +-limit8, the last 9 (output neuron) 16-bit within +-limit16.
  function automatic void ref_random_params(input int n, input int limit8, input int limit16,
                                            output int prm[]);
    prm = new[n];
    foreach (prm[i]) begin
      int v;
      if (i >= n - 9) v = int'($urandom_range(2 * limit16)) - limit16;
      else            v = int'($urandom_range(2 * limit8)) - limit8;
      prm[i] = v & 16'hffff;
    end
  endfunction

endpackage
