// svm_pkg: constants and helper functions shared by the sequential SVM
// classifier.
//
// The classifier evaluates n one-vs-rest linear classifiers, one per clock
// cycle, over m low-precision input features. The default sizes are those of
// the Cardio (cardiotocography) model: m = 21 features and n = 3 classes. The
// class count matches the published latency of that model (78 ms at 38 Hz,
// i.e. 3 cycles). The bit widths of features, weights and biases are this
// design's own choice; the only statement on precision is that inputs are low
// precision and coefficients are quantized as low as accuracy allows.
//
// The trained coefficients of the published models are not available, so the
// default hardwired coefficients come from gen_coef(), a deterministic
// integer hash. A bespoke build for a real model overrides the WEIGHTS and
// BIASES parameters of seq_svm with its trained, quantized values.
package svm_pkg;

  // Default model size: Cardio.
  localparam int unsigned N_CLASSES_DEF  = 3;
  localparam int unsigned N_FEATURES_DEF = 21;

  // Default precisions (this design's choice).
  localparam int unsigned X_BITS_DEF = 4;   // unsigned feature, [0,1] scaled to 0..15
  localparam int unsigned W_BITS_DEF = 8;   // signed weight
  localparam int unsigned B_BITS_DEF = 12;  // signed bias

  // Seed of the default placeholder coefficients.
  localparam int unsigned SEED_DEF = 1;

  // Width of the class counter: ceil(log2(n)), at least one bit.
  function automatic int unsigned cnt_bits(int unsigned n);
    return (n < 2) ? 1 : $clog2(n);
  endfunction

  // Width of the exact weighted sum: a W-bit signed by X-bit unsigned product
  // fits in W+X signed bits, m of them need ceil(log2(m)) more, and adding the
  // bias one more.
  function automatic int unsigned acc_bits(int unsigned x_bits, int unsigned w_bits,
                                           int unsigned b_bits, int unsigned m);
    int unsigned s;
    s = w_bits + x_bits + ((m < 2) ? 0 : $clog2(m));
    return ((s > b_bits) ? s : b_bits) + 1;
  endfunction

  // Deterministic placeholder coefficient number idx of a model with the given
  // seed, as a signed integer that fits in 'bits' bits.
  function automatic int gen_coef(int unsigned seed, int unsigned idx, int unsigned bits);
    logic [31:0] h;
    int          v;
    h = (seed * 32'h9E37_79B1) ^ ((idx + 1) * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    v = int'(h & ((32'd1 << bits) - 32'd1));
    if (v >= (1 << (bits - 1))) v = v - (1 << bits);
    return v;
  endfunction

endpackage
