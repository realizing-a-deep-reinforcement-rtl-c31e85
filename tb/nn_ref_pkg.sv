// nn_ref_pkg -- reference model of the policy network for the testbenches.
//
// A straightforward integer model, independent of the RTL's pipelining:
// a dense layer reads its weights from a flat parameter image (the same
// address map as the hardware: w_jk at base + j*n + k, b_j at base + m*n + j),
// forms sum = sum_k w_jk x_k + (b_j << 10) in 64 bits, applies ReLU
// (hidden layers) and returns sat16(sum >>> 10).
package nn_ref_pkg;

  typedef int ivec_t [];

  function automatic int sat16(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  function automatic int s16(int v);
    return (v & 32'h8000) ? (v | 32'hFFFF_0000) : (v & 32'h0000_FFFF);
  endfunction

  // one dense layer; img holds 16-bit words; sums returns full precision
  function automatic ivec_t dense(input ivec_t x, input int base, input int n,
                                  input int m, input bit relu,
                                  const ref int img [],
                                  output longint sums []);
    ivec_t y;
    y = new[m];
    sums = new[m];
    for (int j = 0; j < m; j++) begin
      longint s;
      s = longint'(s16(img[base + m*n + j])) <<< 10;
      for (int k = 0; k < n; k++)
        s += longint'(s16(img[base + j*n + k])) * longint'(x[k]);
      sums[j] = s;
      if (relu && s < 0) y[j] = 0;
      else               y[j] = sat16(s >>> 10);
    end
    return y;
  endfunction

  // dense layer with extra per-output bias noise (output layer)
  function automatic ivec_t dense_noisy(input ivec_t x, input int base,
                                        input int n, input int m,
                                        const ref int img [],
                                        input ivec_t noise,
                                        output longint sums []);
    ivec_t y;
    y = new[m];
    sums = new[m];
    for (int j = 0; j < m; j++) begin
      longint s;
      s = longint'(sat16(longint'(s16(img[base + m*n + j])) + noise[j])) <<< 10;
      for (int k = 0; k < n; k++)
        s += longint'(s16(img[base + j*n + k])) * longint'(x[k]);
      sums[j] = s;
      y[j] = sat16(s >>> 10);
    end
    return y;
  endfunction

  function automatic int argmax(input longint sums []);
    int a;
    a = 0;
    for (int j = 1; j < sums.size(); j++) if (sums[j] > sums[a]) a = j;
    return a;
  endfunction

endpackage
