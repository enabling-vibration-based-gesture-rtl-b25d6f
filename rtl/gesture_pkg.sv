// gesture_pkg: types, constants and integer-only arithmetic shared by the
// layers of the vibration-gesture accelerator.
//
// Every layer stores activations in signed DATA_W-bit form with an
// asymmetric zero point (real = scale * (q - zero_point)). A layer
// accumulates (x - z_x) * (w - z_w) products in an ACC_W-bit register, adds
// a symmetric integer bias, and maps the sum back to DATA_W bits with
//   y = clamp(z_y + ((acc * M + 2^(S-1)) >>> S))
// where M / 2^S is the combined real scale factor. That is the
// integer-only scheme of Jacob et al. that the design follows; the fixed
// point form of the scale (unsigned M, shift S, round half up) is this
// design's choice.
//
// The trained weights of the published models are not available, so the
// weight and bias memories are filled from a deterministic hash, gen_param(),
// that any model can reproduce. Replace it with real weights to deploy.
package gesture_pkg;

  // Address width of every feature-map buffer: 4410 x 4 = 17640 < 2^15.
  localparam int unsigned ADDR_W = 15;
  // Accumulator width (products of two (DATA_W+1)-bit differences summed).
  localparam int unsigned ACC_W  = 32;
  // Bias width (symmetric, stored in the accumulator's scale).
  localparam int unsigned BIAS_W = 16;

  // Control states shared by the layer FSMs.
  typedef enum logic [2:0] {
    ST_IDLE,   // waiting for enable
    ST_ADDR,   // read addresses presented to the buffers / ROMs
    ST_MAC,    // read data arrives: multiply-accumulate (or compare)
    ST_BIAS,   // bias selected into the ALU
    ST_WRITE,  // requantized result written to the output buffer
    ST_DONE    // layer finished; done held until enable falls
  } layer_state_e;

  // Deterministic pseudo-random parameter in [-2^(bits-1), 2^(bits-1)-1].
  // seed selects the memory, idx the word inside it.
  function automatic int gen_param(int unsigned seed, int unsigned idx,
                                   int unsigned bits);
    logic [31:0] h;
    h = seed * 32'h9E37_79B9 ^ (idx + 32'h7F4A_7C15) * 32'h85EB_CA6B;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return int'(h % (32'd1 << bits)) - int'(32'd1 << (bits - 1));
  endfunction

  // Requantize an accumulator sum to a signed 'bits'-bit activation.
  function automatic int requant(longint acc, int unsigned mult,
                                 int unsigned shift, int zero_out,
                                 int unsigned bits);
    longint prod;
    longint v;
    longint lo;
    longint hi;
    prod = acc * longint'(mult);
    if (shift > 0) prod = prod + (longint'(1) <<< (shift - 1));
    v  = (prod >>> shift) + longint'(zero_out);
    lo = -(longint'(1) <<< (bits - 1));
    hi = (longint'(1) <<< (bits - 1)) - 1;
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    return int'(v);
  endfunction

  // True when requant() had to clamp.
  function automatic bit requant_sat(longint acc, int unsigned mult,
                                     int unsigned shift, int zero_out,
                                     int unsigned bits);
    longint prod;
    longint v;
    prod = acc * longint'(mult);
    if (shift > 0) prod = prod + (longint'(1) <<< (shift - 1));
    v = (prod >>> shift) + longint'(zero_out);
    return (v < -(longint'(1) <<< (bits - 1))) ||
           (v > (longint'(1) <<< (bits - 1)) - 1);
  endfunction

  // ---- Network shape (Sec. "Efficient Model Design") --------------------
  // Output channels of convolutional block b (0-based): 4 for the first two
  // blocks, doubled every two blocks after that (4, 4, 8, 8, 16).
  function automatic int unsigned block_channels(int unsigned b);
    return 4 << (b / 2);
  endfunction

  // Input channels of block b.
  function automatic int unsigned block_in_channels(int unsigned b,
                                                    int unsigned c_in0);
    return (b == 0) ? c_in0 : block_channels(b - 1);
  endfunction

  // Time steps seen by block b: MaxPool1D (kernel 2, stride 2, remainder
  // dropped) halves the length after every block but the last.
  function automatic int unsigned block_length(int unsigned b,
                                               int unsigned n0);
    return n0 >> b;
  endfunction

  // ---- Default quantization parameters per layer -------------------------
  // Layer index l counts the convolutional blocks 0..NB-1, then GAP (NB),
  // Dense1 (NB+1) and Dense2 (NB+2). Zero points are small signed offsets.
  function automatic int act_zero(int unsigned l);
    return int'(l % 5) - 2;        // -2, -1, 0, 1, 2, -2, ...
  endfunction

  function automatic int weight_zero(int unsigned l);
    return int'(l % 3) - 1;        // -1, 0, 1, ...
  endfunction

  // Requantization multiplier for a layer summing 'terms' products, used
  // with conv_shift(bits): M / 2^S ~ 2^(6-bits) / (terms * 6), so outputs
  // fill the range and sometimes saturate at any bit width.
  function automatic int unsigned conv_mult(int unsigned terms);
    return 4096 / (terms * 6) + 1;
  endfunction

  function automatic int unsigned conv_shift(int unsigned bits);
    return 6 + bits;
  endfunction

  // GAP multiplier: M / 2^20 ~ 1 / len keeps the scale unchanged.
  function automatic int unsigned gap_mult(int unsigned len);
    return ((1 << 20) + len / 2) / len;
  endfunction

endpackage
