// gesture_ref_pkg: bit-exact software reference of the accelerator's
// layers, used by the testbenches to work out expected outputs without
// looking at the RTL. Feature maps are flat int arrays stored time-major
// (index t*C + c). Weights come from gesture_pkg::gen_param (they are
// inputs, not results); the arithmetic here is written independently:
// requantization uses explicit floor division instead of shifts.
// The counters record how often padding, saturation and ReLU clamping
// happened, so a testbench can show that each mechanism was exercised.
package gesture_ref_pkg;
  typedef int iarr_t[];

  int n_pad;        // convolution taps that fell outside the window
  int n_sat;        // requantizations that clamped
  int n_relu_clamp; // ReLU inputs below the zero point
  int n_pool_drop;  // trailing odd time steps dropped by max pooling

  function automatic int wparam(int unsigned seed, int unsigned idx, int bits);
    return gesture_pkg::gen_param(seed, idx, bits);
  endfunction

  function automatic longint floor_div(longint v, longint d);
    longint q;
    q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;
    return q;
  endfunction

  function automatic int rq(longint acc, int mult, int shift, int z, int bits);
    longint v;
    longint lo;
    longint hi;
    v = acc * mult;
    if (shift > 0) v = floor_div(v + (longint'(1) << (shift - 1)), longint'(1) << shift);
    v  = v + longint'(z);
    lo = -(longint'(1) << (bits - 1));
    hi = (longint'(1) << (bits - 1)) - 1;
    if (v < lo) begin v = lo; n_sat++; end
    if (v > hi) begin v = hi; n_sat++; end
    return int'(v);
  endfunction

  // 16-bit two's complement view of a bias word as the RTL stores it
  function automatic int bias16(int v);
    logic signed [15:0] b;
    b = 16'(v);
    return int'(b);
  endfunction

  function automatic iarr_t conv_ref(iarr_t x, int c_in, int c_out, int len,
                                     int k, int seed, int zi, int zw, int zo,
                                     int mult, int shift, int bits);
    iarr_t y = new[len * c_out];
    for (int t = 0; t < len; t++)
      for (int co = 0; co < c_out; co++) begin
        longint acc = 0;
        for (int kk = 0; kk < k; kk++)
          for (int ci = 0; ci < c_in; ci++) begin
            int p = t + kk - (k - 1) / 2;
            if (p < 0 || p >= len) n_pad++;
            else acc += longint'(x[p * c_in + ci] - zi) *
                        longint'(wparam(seed, (co * k + kk) * c_in + ci, bits) - zw);
          end
        acc += bias16(wparam(seed + 1000, co, bits + 2));
        y[t * c_out + co] = rq(acc, mult, shift, zo, bits);
      end
    return y;
  endfunction

  function automatic iarr_t sep_ref(iarr_t x, int c_in, int c_out, int len,
                                    int k, int seed, int zi, int zwd, int zmid,
                                    int zwp, int zo, int mult_d, int shift_d,
                                    int mult, int shift, int bits);
    iarr_t y = new[len * c_out];
    int m[];
    m = new[c_in];
    for (int t = 0; t < len; t++) begin
      for (int c = 0; c < c_in; c++) begin
        longint acc = 0;
        for (int kk = 0; kk < k; kk++) begin
          int p = t + kk - (k - 1) / 2;
          if (p < 0 || p >= len) n_pad++;
          else acc += longint'(x[p * c_in + c] - zi) *
                      longint'(wparam(seed, c * k + kk, bits) - zwd);
        end
        acc += bias16(wparam(seed + 1000, c, bits + 2));
        m[c] = rq(acc, mult_d, shift_d, zmid, bits);
      end
      for (int co = 0; co < c_out; co++) begin
        longint acc = 0;
        for (int ci = 0; ci < c_in; ci++)
          acc += longint'(m[ci] - zmid) *
                 longint'(wparam(seed + 2000, co * c_in + ci, bits) - zwp);
        acc += bias16(wparam(seed + 3000, co, bits + 2));
        y[t * c_out + co] = rq(acc, mult, shift, zo, bits);
      end
    end
    return y;
  endfunction

  function automatic iarr_t relu_ref(iarr_t x, int z);
    iarr_t y = new[x.size()];
    foreach (x[i]) begin
      if (x[i] < z) n_relu_clamp++;
      y[i] = (x[i] < z) ? z : x[i];
    end
    return y;
  endfunction

  function automatic iarr_t pool_ref(iarr_t x, int c, int len_in);
    iarr_t y = new[(len_in / 2) * c];
    if (len_in % 2 != 0) n_pool_drop++;
    for (int t = 0; t < len_in / 2; t++)
      for (int cc = 0; cc < c; cc++) begin
        int a = x[(2 * t) * c + cc];
        int b = x[(2 * t + 1) * c + cc];
        y[t * c + cc] = (a > b) ? a : b;
      end
    return y;
  endfunction

  function automatic iarr_t gap_ref(iarr_t x, int c, int len, int zi, int zo,
                                    int mult, int shift, int bits);
    iarr_t y = new[c];
    for (int cc = 0; cc < c; cc++) begin
      longint s = 0;
      for (int t = 0; t < len; t++) s += x[t * c + cc] - zi;
      y[cc] = rq(s, mult, shift, zo, bits);
    end
    return y;
  endfunction

  function automatic iarr_t dense_ref(iarr_t x, int n_in, int n_out, int seed,
                                      int zi, int zw, int zo, int mult,
                                      int shift, int bits);
    iarr_t y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc = 0;
      for (int i = 0; i < n_in; i++)
        acc += longint'(x[i] - zi) * longint'(wparam(seed, o * n_in + i, bits) - zw);
      acc += bias16(wparam(seed + 1000, o, bits + 2));
      y[o] = rq(acc, mult, shift, zo, bits);
    end
    return y;
  endfunction

  // Random activation window of n words in the signed 'bits' range.
  function automatic iarr_t rand_window(int n, int bits);
    iarr_t x = new[n];
    foreach (x[i]) x[i] = int'($urandom % (1 << bits)) - (1 << (bits - 1));
    return x;
  endfunction
  // Whole network as gesture_accel builds it (same per-layer zero points,
  // multipliers and weight seeds). Returns the class logits.
  function automatic iarr_t net_ref(iarr_t x, int dw, int nb, bit sep, int c0,
                                    int n, int k, int hidden, int ncls, int zin);
    iarr_t a = x;
    int len = n, ci = c0, zi = zin, co = 0;
    for (int b = 0; b < nb; b++) begin
      co  = int'(gesture_pkg::block_channels(b));
      len = n >> b;
      if (sep)
        a = sep_ref(a, ci, co, len, k, 10 * (b + 1), zi, gesture_pkg::weight_zero(b),
                    gesture_pkg::act_zero(b + 3), gesture_pkg::weight_zero(b + 1),
                    gesture_pkg::act_zero(b), int'(gesture_pkg::conv_mult(k)), int'(gesture_pkg::conv_shift(dw)),
                    int'(gesture_pkg::conv_mult(ci)), int'(gesture_pkg::conv_shift(dw)), dw);
      else
        a = conv_ref(a, ci, co, len, k, 10 * (b + 1), zi, gesture_pkg::weight_zero(b),
                     gesture_pkg::act_zero(b), int'(gesture_pkg::conv_mult(k * ci)), int'(gesture_pkg::conv_shift(dw)), dw);
      a = relu_ref(a, gesture_pkg::act_zero(b));
      if (b < nb - 1) a = pool_ref(a, co, len);
      ci = co;
      zi = gesture_pkg::act_zero(b);
    end
    a = gap_ref(a, ci, len, gesture_pkg::act_zero(nb - 1), gesture_pkg::act_zero(nb),
                int'(gesture_pkg::gap_mult(len)), 20, dw);
    a = dense_ref(a, ci, hidden, 100, gesture_pkg::act_zero(nb),
                  gesture_pkg::weight_zero(nb + 1), gesture_pkg::act_zero(nb + 1),
                  int'(gesture_pkg::conv_mult(ci)), int'(gesture_pkg::conv_shift(dw)), dw);
    a = relu_ref(a, gesture_pkg::act_zero(nb + 1));
    a = dense_ref(a, hidden, ncls, 200, gesture_pkg::act_zero(nb + 1),
                  gesture_pkg::weight_zero(nb + 2), gesture_pkg::act_zero(nb + 2),
                  int'(gesture_pkg::conv_mult(hidden)), int'(gesture_pkg::conv_shift(dw)), dw);
    return a;
  endfunction

  // Clocks from en rising to done, summed layer by layer from each layer's
  // own pass length (the layers run one after another).
  function automatic longint net_cycles(int nb, bit sep, int c0, int n, int k,
                                        int hidden, int ncls);
    longint cyc = 0;
    int len = n, ci = c0, co = 0;
    for (int b = 0; b < nb; b++) begin
      co  = int'(gesture_pkg::block_channels(b));
      len = n >> b;
      if (sep) cyc += longint'(len) * (ci * (2 * k + 2) + co * (ci + 2) + 2) + 2;
      else     cyc += longint'(len) * co * (2 * k * ci + 2) + 2;
      if (b < nb - 1) cyc += 4 * (len / 2) * co + 2;
      ci = co;
    end
    cyc += ci * (2 * len + 1) + 2;
    cyc += hidden * (2 * ci + 2) + 2;
    cyc += ncls * (2 * hidden + 2) + 2;
    return cyc;
  endfunction
endpackage
