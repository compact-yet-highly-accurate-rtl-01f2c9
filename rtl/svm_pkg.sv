// svm_pkg: constants and constant functions shared by the sequential SVM.
//
// One-vs-One (OvO) over N classes needs one support vector per class pair
// (i,j), i<j, i.e. N(N-1)/2 of them. This design numbers the pairs in
// lexicographic order, (0,1),(0,2),...,(0,N-1),(1,2),...; that number is both
// the control FSM's state code and the support vector's row in the parameter
// storage. The functions below convert between a pair and its number and are
// only ever evaluated at elaboration time, so they cost no hardware.
//
// placeholder_model() fills a model with deterministic pseudo-random values.
// The trained weights of the evaluated classifiers are not published with the
// architecture, so the classifier's default model is this stand-in; a real
// deployment overrides the MODEL parameter with its own quantised weights.
package svm_pkg;

  // Upper bound on the bits of one flat model vector (Pendigits needs
  // 45 rows x 18 columns x 8 bits = 6480).
  localparam int unsigned MODEL_MAX_BITS = 8192;

  // Number of OvO support vectors for n classes.
  function automatic int unsigned num_sv(input int unsigned n);
    return (n * (n - 1)) / 2;
  endfunction

  // Row of pair (i,j), i<j, among n classes.
  function automatic int unsigned pair_index(input int unsigned n,
                                             input int unsigned i,
                                             input int unsigned j);
    return (i * (2 * n - i - 1)) / 2 + (j - i - 1);
  endfunction

  // First class of the pair with row s.
  function automatic int unsigned pair_first(input int unsigned n,
                                             input int unsigned s);
    int unsigned r = 0;
    for (int unsigned i = 0; i + 1 < n; i++) begin
      for (int unsigned j = i + 1; j < n; j++) begin
        if (pair_index(n, i, j) == s) r = i;
      end
    end
    return r;
  endfunction

  // Second class of the pair with row s.
  function automatic int unsigned pair_second(input int unsigned n,
                                              input int unsigned s);
    int unsigned r = 1;
    for (int unsigned i = 0; i + 1 < n; i++) begin
      for (int unsigned j = i + 1; j < n; j++) begin
        if (pair_index(n, i, j) == s) r = j;
      end
    end
    return r;
  endfunction

  // Accumulator width that can never overflow: one product of a w_w-bit
  // signed weight and an x_w-bit input (widened by one sign bit) needs
  // w_w + x_w + 1 bits; m products plus the bias add clog2(m+1) bits.
  function automatic int unsigned safe_acc_width(input int unsigned w_w,
                                                 input int unsigned x_w,
                                                 input int unsigned m);
    return w_w + x_w + 1 + $clog2(m + 1);
  endfunction

  // One pseudo-random w_w-bit value per (seed, k), from a 32-bit
  // multiply-xorshift hash.
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] h;
    h = a ^ (a >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Stand-in model: n_params values of w_w bits each, value k at bits
  // [k*w_w +: w_w], each the low w_w bits of mix32(seed*65536 + k).
  function automatic logic [MODEL_MAX_BITS-1:0] placeholder_model(
      input int unsigned n_params, input int unsigned w_w,
      input int unsigned seed);
    logic [MODEL_MAX_BITS-1:0] v = '0;
    for (int unsigned k = 0; k < n_params; k++) begin
      logic [31:0] h = mix32(seed * 32'd65536 + k);
      for (int unsigned b = 0; b < w_w; b++) begin
        if (k * w_w + b < MODEL_MAX_BITS) v[k * w_w + b] = h[b];
      end
    end
    return v;
  endfunction

endpackage
