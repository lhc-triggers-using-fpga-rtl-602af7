// cnn_pkg: number formats, network dimensions and fixed-point helpers shared by
// every block of the image-recognition trigger.
//
// Number formats. The network's weights and biases of all layers except the
// output neuron are 8-bit signed fixed point with 2 integer bits (6 fractional),
// as the quantisation-aware training prescribes; the output neuron's weights and
// bias and the sigmoid use 16 bits. The split of the 16-bit output weights
// (6 integer, 10 fractional bits), the activation format (16-bit signed, 10
// fractional bits, i.e. [-32, 32)) and the input ET format (16 bits, 0.25 GeV
// per count) are this design's choices.
//
// Dimensions. The defaults describe the chosen configuration: a 12x12 eta-phi
// image padded to 18x18, a first convolution with 3x3 kernels, stride 3 and 4
// filters, a fixed 3x3 second convolution with one filter and stride 1, and fully
// connected layers of 32, 16 and 8 neurons before one output neuron. n_params()
// reproduces the parameter counts of the other configurations the design was
// sized against (e.g. 1237, 1256, 1294, 1884, 1917 for five of them).
package cnn_pkg;

  // ---------------------------------------------------------------- formats
  localparam int ACT_W    = 16;  // activation width (signed)
  localparam int ACT_FRAC = 10;  // activation fractional bits
  localparam int W_W      = 8;   // hidden-layer weight width (signed)
  localparam int W_FRAC   = 6;   // 8 bits total, 2 integer bits
  localparam int OW_W     = 16;  // output-neuron weight width
  localparam int OW_FRAC  = 10;
  localparam int SCORE_W  = 16;  // sigmoid output, unsigned, all fractional
  localparam int ET_W     = 16;  // ET sums, 0.25 GeV per count
  localparam int ET_SAT   = 2048; // 512 GeV saturation point in ET counts
  localparam int ACC_W    = 48;  // accumulator width, wide enough for every layer

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [OW_W-1:0]  owgt_t;
  typedef logic [SCORE_W-1:0]      score_t;
  typedef logic [ET_W-1:0]         et_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam act_t ACT_MAX = act_t'((1 << (ACT_W - 1)) - 1);
  localparam act_t ACT_MIN = act_t'(-(1 << (ACT_W - 1)));
  localparam act_t ACT_ONE = act_t'(1 << ACT_FRAC);

  // ---------------------------------------------------------------- geometry
  localparam int TOWERS = 72;  // trigger towers per axis for |eta| < 3
  localparam int IMG    = 12;  // image pixels per axis
  localparam int PAD    = 3;   // phi wrap / eta zero padding on each side
  localparam int K1     = 3;   // first convolution kernel
  localparam int S1     = 3;   // first convolution stride
  localparam int F1     = 4;   // first convolution filters
  localparam int K2     = 3;   // second convolution kernel (fixed)
  localparam int S2     = 1;
  localparam int F2     = 1;
  localparam int D1     = 32;  // fully connected layer sizes
  localparam int D2     = 16;
  localparam int D3     = 8;

  function automatic int conv_out(int n, int k, int s);
    return (n - k) / s + 1;
  endfunction

  // Size of the flattened second-convolution output.
  function automatic int n_flat(int img_p, int k1, int s1);
    int c1, c2;
    c1 = conv_out(img_p, k1, s1);
    c2 = conv_out(c1, K2, S2);
    return c2 * c2 * F2;
  endfunction

  // Parameter offsets in the parameter store, in this order:
  // conv1 w[f][ky][kx], conv1 b[f], conv2 w[ky][kx][c], conv2 b,
  // dense1 w[o][i], b[o], dense2 w, b, dense3 w, b, output w[i], b.
  function automatic int off_c1b(int k1, int f1);  return f1 * k1 * k1; endfunction
  function automatic int off_c2w(int k1, int f1);  return off_c1b(k1, f1) + f1; endfunction
  function automatic int off_c2b(int k1, int f1);  return off_c2w(k1, f1) + K2 * K2 * f1 * F2; endfunction
  function automatic int off_d1w(int k1, int f1);  return off_c2b(k1, f1) + F2; endfunction
  function automatic int off_d1b(int img_p, int k1, int s1, int f1);
    return off_d1w(k1, f1) + D1 * n_flat(img_p, k1, s1);
  endfunction
  function automatic int off_d2w(int img_p, int k1, int s1, int f1);
    return off_d1b(img_p, k1, s1, f1) + D1;
  endfunction
  function automatic int off_d2b(int img_p, int k1, int s1, int f1);
    return off_d2w(img_p, k1, s1, f1) + D2 * D1;
  endfunction
  function automatic int off_d3w(int img_p, int k1, int s1, int f1);
    return off_d2b(img_p, k1, s1, f1) + D2;
  endfunction
  function automatic int off_d3b(int img_p, int k1, int s1, int f1);
    return off_d3w(img_p, k1, s1, f1) + D3 * D2;
  endfunction
  function automatic int off_ow(int img_p, int k1, int s1, int f1);
    return off_d3b(img_p, k1, s1, f1) + D3;
  endfunction
  function automatic int off_ob(int img_p, int k1, int s1, int f1);
    return off_ow(img_p, k1, s1, f1) + D3;
  endfunction
  function automatic int n_params(int img_p, int k1, int s1, int f1);
    return off_ob(img_p, k1, s1, f1) + 1;
  endfunction

  // Requantise an accumulator with `shift` fractional bits too many to the
  // activation format: floor (arithmetic shift), optional ReLU, saturation.
  function automatic act_t requant(acc_t acc, int shift, bit relu);
    acc_t v;
    v = acc >>> shift;
    if (relu && v < 0) return '0;
    if (v > acc_t'(ACT_MAX)) return ACT_MAX;
    if (v < acc_t'(ACT_MIN)) return ACT_MIN;
    return act_t'(v);
  endfunction

endpackage
