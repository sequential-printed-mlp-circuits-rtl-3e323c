// mlp_pkg: sizes, width rules and the hardwired model of the sequential
// printed MLP classifier.
//
// The classifier is bespoke: every weight, bias and approximation choice is a
// constant of the circuit, not a value held in storage. A trained model is
// not part of this RTL, so the package defines a stand-in model by formula.
// A small integer hash of (seed, layer, neuron, input index) gives each
// weight a sign and a power of two. Swapping in a real model means replacing
// the bodies of weight_pow(), weight_sgn(), bias_red() and
// neuron_pmin(). Nothing else needs to change.
//
// Follows the paper:
//  - 4-bit inputs and 8-bit power-of-two weights, w = (-1)^s * 2^p.
//  - Per-neuron common power ("common denominator"). The neuron stores
//    p - pmin and shifts its result left by pmin afterwards.
//  - Single-cycle neurons approximate a neuron from its two most important
//    inputs. Importance is ranked by expected absolute product.
//  - Default sizes are those of the Arrhythmia model: 274 inputs and 16
//    classes. 4 hidden neurons follow from 274*4 + 4*16 = 1160 coefficients.
// This design's own choices:
//  - The hash model of weights and biases.
//  - The mean input level used for ranking, taken as mid-scale because no
//    dataset statistics are available.
//  - The accumulator width rule sum_w().
//  - The qReLU shift.
package mlp_pkg;

  // ---- default configuration (Arrhythmia-sized) ----
  localparam int unsigned N_IN_DEF        = 274;  // N: inputs (features)
  localparam int unsigned N_HID_DEF       = 4;    // P: hidden neurons
  localparam int unsigned N_OUT_DEF       = 16;   // R: output neurons (classes)
  localparam int unsigned IN_W_DEF        = 4;    // input fixed-point width
  localparam int unsigned W_BITS_DEF      = 8;    // pow2 weight resolution
  localparam int unsigned ACT_W_DEF       = 4;    // hidden activation width (assumed)
  localparam int unsigned QRELU_SHIFT_DEF = 9;    // LSBs dropped by qReLU (assumed)
  localparam int unsigned SEED_DEF        = 32'h5EED_2025;

  // Layer identifiers for the model functions.
  typedef enum int unsigned {
    LAYER_HID = 0,
    LAYER_OUT = 1
  } layer_e;

  // ---- width rules ----
  // Bits for a power field p in [0, w_bits-1].
  function automatic int unsigned pow_w(input int unsigned w_bits);
    return (w_bits > 2) ? $clog2(w_bits) : 1;
  endfunction

  // Signed accumulator width of a neuron with nin inputs of in_w bits.
  // |x*w| < 2^(in_w+w_bits-1), |bias| < 2^(in_w+w_bits-1) (see bias_red),
  // so |sum| < (nin+2) * 2^(in_w+w_bits-1); one more bit for the sign.
  function automatic int unsigned sum_w(input int unsigned nin, input int unsigned in_w,
                                        input int unsigned w_bits);
    return in_w + w_bits + $clog2(nin + 2);
  endfunction

  // Index width for a selector over n items (at least 1 bit).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // ---- stand-in model ----
  function automatic logic [31:0] mix(input logic [31:0] seed, input int unsigned layer,
                                      input int unsigned neuron, input int unsigned idx);
    logic [31:0] h;
    h = seed ^ (32'(layer) * 32'h9E37_79B1) ^ (32'(neuron) * 32'h85EB_CA77)
             ^ (32'(idx) * 32'hC2B2_AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Common power of all weights of a neuron (0..2, never above w_bits-1).
  function automatic int unsigned neuron_pmin(input logic [31:0] seed, input int unsigned layer,
                                              input int unsigned neuron, input int unsigned w_bits);
    int unsigned m;
    m = mix(seed, layer, neuron, 32'hFFFF) % 3;
    return (m < w_bits) ? m : w_bits - 1;
  endfunction

  // Full power p of weight idx of a neuron, in [pmin, w_bits-1].
  function automatic int unsigned weight_pow(input logic [31:0] seed, input int unsigned layer,
                                             input int unsigned neuron, input int unsigned idx,
                                             input int unsigned w_bits);
    int unsigned pmin;
    pmin = neuron_pmin(seed, layer, neuron, w_bits);
    return pmin + (mix(seed, layer, neuron, idx) % (w_bits - pmin));
  endfunction

  // Sign s of weight idx (1 = negative).
  function automatic logic weight_sgn(input logic [31:0] seed, input int unsigned layer,
                                      input int unsigned neuron, input int unsigned idx);
    return |(mix(seed, layer, neuron, idx) & 32'h0010_0000);
  endfunction

  // Bias in units of 2^pmin (the value the accumulator is reset to).
  // Range [-2^(in_w+w_bits-3), 2^(in_w+w_bits-3)), so the full-scale bias
  // (times 2^pmin, pmin <= 2) stays below 2^(in_w+w_bits-1).
  function automatic longint bias_red(input logic [31:0] seed, input int unsigned layer,
                                      input int unsigned neuron, input int unsigned in_w,
                                      input int unsigned w_bits);
    longint span;
    span = longint'(1) << (in_w + w_bits - 2);
    return longint'({32'b0, mix(seed, layer, neuron, 32'hB1A5)}) % span - span / 2;
  endfunction

  // ---- single-cycle approximation of neuron `neuron` ----
  // Ranks the inputs by expected absolute product E[x]*|w|. With E[x] taken
  // equal for all inputs, this is the rank by weight power (ties: lower index).
  // which = 0 gives the more important input, which = 1 the second.
  function automatic int unsigned approx_rank(input logic [31:0] seed, input int unsigned layer,
                                              input int unsigned neuron, input int unsigned nin,
                                              input int unsigned w_bits, input int unsigned which);
    int unsigned best, second, pb, ps, p;
    best = 0;
    second = (nin > 1) ? 1 : 0;
    pb = weight_pow(seed, layer, neuron, 0, w_bits);
    ps = 0;
    if (nin > 1) begin
      p = weight_pow(seed, layer, neuron, 1, w_bits);
      if (p > pb) begin
        best = 1; second = 0; ps = pb; pb = p;
      end else begin
        ps = p;
      end
    end
    for (int unsigned i = 2; i < nin; i++) begin
      p = weight_pow(seed, layer, neuron, i, w_bits);
      if (p > pb) begin
        second = best; ps = pb; best = i; pb = p;
      end else if (p > ps) begin
        second = i; ps = p;
      end
    end
    return (which == 0) ? best : second;
  endfunction

  // The two important inputs in order of arrival (lower index arrives first).
  function automatic int unsigned approx_first(input logic [31:0] seed, input int unsigned layer,
                                               input int unsigned neuron, input int unsigned nin,
                                               input int unsigned w_bits);
    int unsigned a, b;
    a = approx_rank(seed, layer, neuron, nin, w_bits, 0);
    b = approx_rank(seed, layer, neuron, nin, w_bits, 1);
    return (a < b) ? a : b;
  endfunction

  function automatic int unsigned approx_second(input logic [31:0] seed, input int unsigned layer,
                                                input int unsigned neuron, input int unsigned nin,
                                                input int unsigned w_bits);
    int unsigned a, b;
    a = approx_rank(seed, layer, neuron, nin, w_bits, 0);
    b = approx_rank(seed, layer, neuron, nin, w_bits, 1);
    return (a < b) ? b : a;
  endfunction

  // Bit of the input that is sampled: the expected leading 1 of the input.
  // With a mid-scale mean input this is the input MSB.
  function automatic int unsigned approx_bit(input int unsigned in_w);
    return in_w - 1;
  endfunction

  // Column of the expected leading 1 of the larger average product
  // E[x]*2^p: input leading-1 position plus the larger weight power.
  function automatic int unsigned approx_lead(input logic [31:0] seed, input int unsigned layer,
                                              input int unsigned neuron, input int unsigned nin,
                                              input int unsigned in_w, input int unsigned w_bits);
    int unsigned a;
    a = approx_rank(seed, layer, neuron, nin, w_bits, 0);
    return approx_bit(in_w) + weight_pow(seed, layer, neuron, a, w_bits);
  endfunction

endpackage
