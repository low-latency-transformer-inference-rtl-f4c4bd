// tb_ref_pkg: floating-point reference model of the transformer layers, used
// by the testbenches to work out expected outputs independently of the RTL.
//
// Matrices are flat dynamic arrays of reals, row-major: X[t*width + j] is
// element j of time step t. Parameters (weights, biases, gamma, beta) are read
// from a flat array W that mirrors the configuration address map of the RTL,
// starting at a given base index; the layouts are the ones documented in the
// RTL modules. No rounding is modelled: the testbenches compare with a
// tolerance.
package tb_ref_pkg;
  typedef real rvec_t[];

  localparam real LSB = 1.0 / 1024.0;   // one step of data_t

  // quantise a real to data_t steps (floor) and back, with saturation
  function automatic real q(input real x);
    real y;
    y = $floor(x * 1024.0) / 1024.0;
    if (y > 32767.0 / 1024.0) y = 32767.0 / 1024.0;
    if (y < -32.0) y = -32.0;
    return y;
  endfunction

  // Y[t][o] = b[o] + sum_i W[o][i] X[t][i]   (optional ReLU)
  function automatic rvec_t dense_seq(input rvec_t x, input int seq, input int n_in,
                                      input int n_out, input rvec_t w, input int base,
                                      input bit relu);
    rvec_t y = new[seq * n_out];
    for (int t = 0; t < seq; t++)
      for (int o = 0; o < n_out; o++) begin
        real s = w[base + n_in * n_out + o];
        for (int i = 0; i < n_in; i++) s += w[base + o * n_in + i] * x[t * n_in + i];
        if (relu && s < 0.0) s = 0.0;
        y[t * n_out + o] = s;
      end
    return y;
  endfunction

  function automatic rvec_t softmax_vec(input rvec_t z);
    rvec_t y = new[z.size()];
    real s = 0.0;
    foreach (z[i]) begin
      real zc = (z[i] > 8.0) ? 8.0 : ((z[i] < -8.0) ? -8.0 : z[i]);
      y[i] = $exp(zc);
      s += y[i];
    end
    foreach (y[i]) y[i] = y[i] / s;
    return y;
  endfunction

  // one head: softmax(Q K^T / sqrt(dk)) V, all [seq][dk]
  function automatic rvec_t attend(input rvec_t qm, input rvec_t km, input rvec_t vm,
                                   input int seq, input int dk);
    rvec_t o = new[seq * dk];
    for (int t = 0; t < seq; t++) begin
      rvec_t s = new[seq];
      rvec_t p;
      for (int j = 0; j < seq; j++) begin
        real d = 0.0;
        for (int k = 0; k < dk; k++) d += qm[t * dk + k] * km[j * dk + k];
        s[j] = d / $sqrt(real'(dk));
      end
      p = softmax_vec(s);
      for (int k = 0; k < dk; k++) begin
        real a = 0.0;
        for (int j = 0; j < seq; j++) a += p[j] * vm[j * dk + k];
        o[t * dk + k] = a;
      end
    end
    return o;
  endfunction

  function automatic int dense_words(input int n_in, input int n_out);
    return n_in * n_out + n_out;
  endfunction

  function automatic rvec_t mha(input rvec_t x, input int seq, input int d, input int heads,
                                input int dk, input rvec_t w, input int base);
    int dw = dense_words(d, dk);
    rvec_t cat = new[seq * heads * dk];
    for (int h = 0; h < heads; h++) begin
      rvec_t qm, km, vm, o;
      qm = dense_seq(x, seq, d, dk, w, base + (3 * h + 0) * dw, 1'b0);
      km = dense_seq(x, seq, d, dk, w, base + (3 * h + 1) * dw, 1'b0);
      vm = dense_seq(x, seq, d, dk, w, base + (3 * h + 2) * dw, 1'b0);
      o  = attend(qm, km, vm, seq, dk);
      for (int t = 0; t < seq; t++)
        for (int k = 0; k < dk; k++) cat[t * heads * dk + h * dk + k] = o[t * dk + k];
    end
    return dense_seq(cat, seq, heads * dk, d, w, base + 3 * heads * dw, 1'b0);
  endfunction

  function automatic rvec_t layernorm(input rvec_t x, input int seq, input int d,
                                      input rvec_t w, input int base);
    rvec_t y = new[seq * d];
    for (int t = 0; t < seq; t++) begin
      real m = 0.0, v = 0.0;
      for (int j = 0; j < d; j++) m += x[t * d + j];
      m = m / d;
      for (int j = 0; j < d; j++) v += (x[t * d + j] - m) * (x[t * d + j] - m);
      v = v / d;
      for (int j = 0; j < d; j++)
        y[t * d + j] = (v > 0.0) ? (x[t * d + j] - m) / $sqrt(v) * w[base + j] + w[base + d + j]
                                 : w[base + d + j];
    end
    return y;
  endfunction

  function automatic rvec_t addm(input rvec_t a, input rvec_t b);
    rvec_t y = new[a.size()];
    foreach (a[i]) y[i] = a[i] + b[i];
    return y;
  endfunction

  function automatic int block_words(input int d, input int heads, input int dk, input int ff);
    return 3 * heads * dense_words(d, dk) + dense_words(heads * dk, d) + 4 * d
           + dense_words(d, ff) + dense_words(ff, d);
  endfunction

  function automatic rvec_t block(input rvec_t x, input int seq, input int d, input int heads,
                                  input int dk, input int ff, input bit ln,
                                  input rvec_t w, input int base);
    int b_ln1 = base + 3 * heads * dense_words(d, dk) + dense_words(heads * dk, d);
    int b_ffn = b_ln1 + 2 * d;
    int b_ln2 = b_ffn + dense_words(d, ff) + dense_words(ff, d);
    rvec_t a, x1, f, y;
    a  = addm(x, mha(x, seq, d, heads, dk, w, base));
    x1 = ln ? layernorm(a, seq, d, w, b_ln1) : a;
    f  = dense_seq(dense_seq(x1, seq, d, ff, w, b_ffn, 1'b1), seq, ff, d, w,
                   b_ffn + dense_words(d, ff), 1'b0);
    y  = addm(x1, f);
    return ln ? layernorm(y, seq, d, w, b_ln2) : y;
  endfunction
endpackage
