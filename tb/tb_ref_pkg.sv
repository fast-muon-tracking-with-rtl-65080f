// tb_ref_pkg: bit-exact reference model of the multistage tracking network,
// written independently of the RTL for the testbenches.
//
// Numbers are carried as plain integers counting least significant bits.
// With F fraction bits (F = 7 by default, set F for other quantisations),
// activations are F+5 bits wide, weights F+3, biases F+5 and accumulators
// F+13 with F+2 fraction bits. A product of an activation and a weight
// (2F fraction bits) is floored to F+2 fraction bits; sums wrap at the
// accumulator width; an accumulator becomes an activation by flooring 2 bits
// and wrapping. The output layer gives 16 bits with 7 fraction bits.
// tanh is floor(tanh(x) * 2^F) with x clamped to [-4, 4).
// The model also counts how often tanh saturates and ReLU clips, so that
// testbenches can show that these cases were exercised.
package tb_ref_pkg;

  int F = 7;   // fraction bits of the model

  function automatic int dw(); return F + 5;  endfunction
  function automatic int ww(); return F + 3;  endfunction
  function automatic int bw(); return F + 5;  endfunction
  function automatic int aw(); return F + 13; endfunction

  typedef int ivec_t [];

  int n_tanh_sat  = 0;  // tanh inputs outside [-4, 4)
  int n_relu_zero = 0;  // negative ReLU inputs set to zero

  function automatic longint wrap(longint v, int bits);
    longint m, r;
    m = longint'(1) << bits;
    r = v & (m - 1);
    if (r >= (m >> 1)) r = r - m;
    return r;
  endfunction

  // Uniform random signed number of the given width.
  function automatic int rnd_s(int bits);
    return int'(wrap(longint'($urandom), bits));
  endfunction

  function automatic longint mulacc(longint x, longint w);
    return wrap((x * w) >>> (F - 2), aw());
  endfunction

  function automatic int to_data(longint acc);
    return int'(wrap(wrap(acc, aw()) >>> 2, dw()));
  endfunction

  function automatic int tanh_ref(int x);
    int c;
    int lim;
    lim = 4 << F;
    c = x;
    if (c < -lim)    begin c = -lim;    n_tanh_sat++; end
    if (c > lim - 1) begin c = lim - 1; n_tanh_sat++; end
    return $rtoi($floor($tanh(real'(c) / real'(1 << F)) * real'(1 << F)));
  endfunction

  function automatic int relu_ref(int x);
    if (x < 0) begin n_relu_zero++; return 0; end
    return x;
  endfunction

  // Conv over hits h[p*C + c], weights w[k*C + c], bias b, same padding.
  function automatic ivec_t conv_ref(bit h [], int w [], int b, int n, int c_n);
    ivec_t y;
    y = new[n];
    for (int p = 0; p < n; p++) begin
      longint acc;
      acc = longint'(b) <<< 2;
      for (int k = 0; k < 3; k++)
        for (int c = 0; c < c_n; c++)
          if (p + k - 1 >= 0 && p + k - 1 < n && h[(p + k - 1)*c_n + c])
            acc = acc + (longint'(w[k*c_n + c]) <<< 2);
      y[p] = to_data(acc);
    end
    return y;
  endfunction

  // Masked linear with band half-width hw: weight w[j*(2hw+1)+k] multiplies
  // x[j+k-hw].
  function automatic ivec_t ml_ref(int x [], int w [], int hw);
    ivec_t y;
    int n;
    n = x.size();
    y = new[n];
    for (int j = 0; j < n; j++) begin
      longint acc;
      acc = 0;
      for (int i = j - hw; i <= j + hw; i++)
        if (i >= 0 && i < n) acc = acc + mulacc(longint'(x[i]), longint'(w[j*(2*hw+1) + i - j + hw]));
      y[j] = to_data(acc);
    end
    return y;
  endfunction

  // Affine layer, weights w[o*n_in+i], biases b[o]; returns raw outputs
  // with out_frac fraction bits wrapped to out_w bits.
  function automatic ivec_t affine_ref(int x [], int w [], int b [], int out_w, int out_frac);
    ivec_t y;
    int n_in, n_out;
    n_in  = x.size();
    n_out = b.size();
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc;
      acc = longint'(b[o]) <<< 2;
      for (int i = 0; i < n_in; i++) acc = acc + mulacc(longint'(x[i]), longint'(w[o*n_in + i]));
      acc = wrap(acc, aw());
      if (F + 2 >= out_frac) acc = acc >>> (F + 2 - out_frac);
      else                   acc = acc <<< (out_frac - F - 2);
      y[o] = int'(wrap(acc, out_w));
    end
    return y;
  endfunction

  function automatic ivec_t tanh_vec(int x []);
    ivec_t y;
    y = new[x.size()];
    foreach (x[i]) y[i] = tanh_ref(x[i]);
    return y;
  endfunction

  function automatic ivec_t relu_vec_ref(int x []);
    ivec_t y;
    y = new[x.size()];
    foreach (x[i]) y[i] = relu_ref(x[i]);
    return y;
  endfunction

  function automatic ivec_t add_ref(int a [], int b []);
    ivec_t y;
    y = new[a.size()];
    foreach (a[i]) y[i] = int'(wrap(longint'(a[i]) + longint'(b[i]), dw()));
    return y;
  endfunction

  // All weights of the network, indexed by layer as in the top-level
  // address map: 0-2 convs, 3 ML_13, 4 ML_12, 5 ML_23, 6-9 affine layers.
  class net_weights;
    int w [10][];
    int b [10][];   // affine biases; conv biases in b[l][0]
    static int conv_c [3] = '{3, 2, 2};
    static int fc_in  [4] = '{50, 28, 14, 8};
    static int fc_out [4] = '{28, 14, 8, 1};

    // Random weights of wbits and biases of bbits bits.
    function void randomise(int wbits, int bbits);
      for (int l = 0; l < 3; l++) begin
        w[l] = new[3*conv_c[l]];
        foreach (w[l][i]) w[l][i] = rnd_s(wbits);
        b[l] = new[1];
        b[l][0] = rnd_s(bbits);
      end
      for (int l = 3; l < 6; l++) begin
        w[l] = new[50*5];
        foreach (w[l][i]) w[l][i] = rnd_s(wbits);
        b[l] = new[0];
      end
      for (int l = 6; l < 10; l++) begin
        w[l] = new[fc_in[l-6]*fc_out[l-6]];
        foreach (w[l][i]) w[l][i] = rnd_s(wbits);
        b[l] = new[fc_out[l-6]];
        foreach (b[l][i]) b[l][i] = rnd_s(bbits);
      end
    endfunction

    // Register address (local) and value of every register of layer l, in
    // the order the RTL maps them: weights first, then biases.
    function int n_regs(int l);
      return w[l].size() + b[l].size();
    endfunction

    function int reg_value(int l, int a);
      if (a < w[l].size()) return w[l][a];
      return b[l][a - w[l].size()];
    endfunction
  endclass

  // Feature extractor reference: returns the 50-value track state.
  function automatic ivec_t fe_ref(net_weights nw, bit h1 [], bit h2 [], bit h3 []);
    ivec_t c1, c2, c3, s1, s2, p12, p13, p23, s3;
    c1  = conv_ref(h1, nw.w[0], nw.b[0][0], 50, 3);
    c2  = conv_ref(h2, nw.w[1], nw.b[1][0], 50, 2);
    c3  = conv_ref(h3, nw.w[2], nw.b[2][0], 50, 2);
    s1  = tanh_vec(c1);
    p13 = ml_ref(s1, nw.w[3], 2);
    p12 = ml_ref(s1, nw.w[4], 2);
    s2  = tanh_vec(add_ref(p12, c2));
    p23 = ml_ref(s2, nw.w[5], 2);
    s3  = tanh_vec(add_ref(add_ref(p13, p23), c3));
    return s3;
  endfunction

  // Fully connected reference: returns theta as an unsigned 16-bit value.
  function automatic int fc_ref(net_weights nw, int x []);
    ivec_t h;
    h = affine_ref(x, nw.w[6], nw.b[6], dw(), F);
    h = affine_ref(relu_vec_ref(h), nw.w[7], nw.b[7], dw(), F);
    h = affine_ref(relu_vec_ref(h), nw.w[8], nw.b[8], dw(), F);
    h = affine_ref(relu_vec_ref(h), nw.w[9], nw.b[9], 16, 7);
    return h[0] & 32'hffff;
  endfunction

endpackage
