// bnn_pkg -- shared types, sizes and design-time parameters of the
// combinational binarized neural network (BNN).
//
// What it holds:
//  * sign_sel_e, the 2-bit code that picks how a neuron turns its popcount
//    into a bit (the four cases of the batch-norm folding: compare ">=",
//    compare "<=", constant 1, constant 0).
//  * cnt_width(n) = floor(log2(n)) + 1, the width of a popcount over n bits
//    and of the matching threshold.
//  * The channel list of the VGG-like topology (1, 16, 32, 48, 64 feature
//    maps), the hidden fully connected width (64) and the class count (4).
//  * Constant functions that produce the hard-wired parameters (weights,
//    thresholds, sign codes) of every filter.
//
// The parameters of a trained network are not available, so this design
// fills them from a deterministic integer hash of (seed, layer, filter,
// bit).  They are elaboration-time constants exactly like trained values
// would be, so the logic that synthesis sees has the same shape: every XNOR
// with a constant weight becomes a wire or an inverter.  To use a trained
// model, replace filter_weights/filter_thresh/filter_sign with functions
// that return the trained values.
//
// Threshold rule used for the generated parameters: for a popcount over n
// bits the threshold is n/2 + isqrt(n)/2 plus a jitter of -1..+1 (about one
// standard deviation above the mean for random inputs, so that roughly one
// neuron in six fires and the OR pooling that follows does not saturate).
// Neurons in "<=" mode use the mirrored value n - that.
package bnn_pkg;

  // Selector code of Fig. 2's 2-bit sign(m) input, in the order the four
  // selector inputs are drawn: ">" compare, "<" compare, 1'b1, 1'b0.
  typedef enum logic [1:0] {
    SEL_GE   = 2'b00,  // gamma > 0 : out = phi >= thresh
    SEL_LE   = 2'b01,  // gamma < 0 : out = phi <= thresh
    SEL_ONE  = 2'b10,  // gamma = 0, beta >= 0 : out = 1
    SEL_ZERO = 2'b11   // gamma = 0, beta <  0 : out = 0
  } sign_sel_e;

  // Largest receptive field a filter can have (weights vector width of the
  // parameter functions).  The 32x32 model needs at most 48*9 = 432.
  localparam int unsigned MAX_NRF = 1024;

  // Filter size of every convolutional layer (kw = kh = 3).
  localparam int unsigned KSIZE = 3;

  // Topology of Table I: feature maps after each conv layer.
  localparam int unsigned MAX_CONV = 4;
  localparam int unsigned CONV_CH [MAX_CONV+1] = '{1, 16, 32, 48, 64};
  localparam int unsigned FC_HIDDEN   = 64;
  localparam int unsigned NUM_CLASSES = 4;

  // Value that stands for a pixel outside the map in a convolution window.
  localparam logic PAD_VALUE = 1'b0;

  // floor(log2(n)) for n >= 1.
  function automatic int unsigned flog2(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((n >> (r + 1)) != 0) r++;
    return r;
  endfunction

  // Width of a popcount over n bits: floor(log2(n)) + 1 (Fig. 2).
  function automatic int unsigned cnt_width(input int unsigned n);
    return flog2(n) + 1;
  endfunction

  // Integer square root (floor).
  function automatic int unsigned isqrt(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  // 32-bit integer hash (multiply / xor-shift mixing).
  function automatic logic [31:0] mix(input logic [31:0] a, input logic [31:0] b,
                                      input logic [31:0] c, input logic [31:0] d);
    logic [31:0] h;
    h = a * 32'h9E37_79B1 ^ b * 32'h85EB_CA77 ^ c * 32'hC2B2_AE3D ^ d * 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Hard-wired weights of filter m of a layer, bit i of the receptive field.
  function automatic logic [MAX_NRF-1:0] filter_weights(input int unsigned seed,
                                                        input int unsigned layer,
                                                        input int unsigned m,
                                                        input int unsigned nrf);
    logic [MAX_NRF-1:0] w;
    logic [31:0] h;
    w = '0;
    for (int unsigned i = 0; i < nrf; i++) begin
      h = mix(seed, layer + 1, m + 1, i + 1);
      w[i] = ^h;
    end
    return w;
  endfunction

  // Selector code of filter m of a layer: mostly ">=", some "<=", a few
  // constant neurons.  Filters 1, 2 and 3 of every layer with more than four
  // filters are pinned to "<=", "1" and "0" so that each mode exists.
  function automatic sign_sel_e filter_sign(input int unsigned seed,
                                            input int unsigned layer,
                                            input int unsigned m,
                                            input int unsigned nfilt);
    logic [31:0] h;
    h = mix(seed, layer + 1, m + 1, 32'hFFFF_FFFF);
    if (nfilt > 4 && m == 1) return SEL_LE;
    if (nfilt > 4 && m == 2) return SEL_ONE;
    if (nfilt > 4 && m == 3) return SEL_ZERO;
    if (h % 7 >= 5) return SEL_LE;
    return SEL_GE;
  endfunction

  // Threshold of filter m of a layer for a popcount over nrf bits.
  function automatic int unsigned filter_thresh(input int unsigned seed,
                                                input int unsigned layer,
                                                input int unsigned m,
                                                input int unsigned nrf,
                                                input int unsigned nfilt);
    logic [31:0] h;
    int unsigned t;
    h = mix(seed, layer + 1, m + 1, 32'hFFFF_FFFE);
    t = nrf / 2 + isqrt(nrf) / 2 + h % 3;
    t = (t > 0) ? t - 1 : 0;
    if (filter_sign(seed, layer, m, nfilt) == SEL_LE) t = (t <= nrf) ? nrf - t : 0;
    return t;
  endfunction

endpackage
