// qubicml_ref_pkg: reference models used by the testbenches.
//
// These functions recompute, with plain 64-bit integer arithmetic and
// without any of the RTL's pipelining, what each stage of the readout and
// inference path must produce: the Q10.17 x Q6.12 multiply with its bit
// selection, the shift-only normalization, a dense layer with 27-bit wrap,
// ReLU, the sigmoid table address and entry, and the whole 2-8-4-1 network.
package qubicml_ref_pkg;
  import qubicml_pkg::*;

  // wrap a 64-bit value to 27 bits, signed
  function automatic longint wrap27(longint v);
    longint m;
    m = v & ((64'sd1 << 27) - 1);
    if (m >= (64'sd1 << 26)) m = m - (64'sd1 << 27);
    return m;
  endfunction

  // Q10.17 x Q6.12 -> Q10.17 (product bits 38:12)
  function automatic longint ref_mult(longint a, longint w);
    return wrap27((a * w) >>> 12);
  endfunction

  // ((x + 2^n - mu) << 17) >> (n + 1), truncated to 27 bits
  function automatic longint ref_scale(longint x, longint mu, int n);
    longint t;
    t = x - mu + (64'sd1 << n);
    return wrap27((t <<< 17) >>> (n + 1));
  endfunction

  function automatic longint ref_relu(longint v);
    return (v < 0) ? 0 : v;
  endfunction

  function automatic int ref_sig_addr(longint x);
    if (x < -(64'sd8 <<< 17)) return 0;
    if (x >= (64'sd8 <<< 17)) return 4095;
    return int'((x + (64'sd8 <<< 17)) >>> 9);
  endfunction

  function automatic int ref_sig_entry(int addr);
    real xr;
    xr = -8.0 + (real'(addr) + 0.5) / 256.0;
    return int'($floor(131072.0 / (1.0 + $exp(-xr))));
  endfunction

  // whole network; returns layer-3 output, probability and state
  function automatic void ref_fnn(input fnn_params_t p, input longint xi, input longint xq,
                                  output longint out3, output int prob, output bit st);
    longint in0 [2];
    longint h1 [8];
    longint h2 [4];
    longint acc;
    in0[0] = ref_scale(xi, longint'(p.mu_i), int'(p.n_i));
    in0[1] = ref_scale(xq, longint'(p.mu_q), int'(p.n_q));
    for (int n = 0; n < 8; n++) begin
      acc = longint'(p.b1[n]);
      for (int i = 0; i < 2; i++) acc += ref_mult(in0[i], longint'(p.w1[n][i]));
      h1[n] = ref_relu(wrap27(acc));
    end
    for (int n = 0; n < 4; n++) begin
      acc = longint'(p.b2[n]);
      for (int i = 0; i < 8; i++) acc += ref_mult(h1[i], longint'(p.w2[n][i]));
      h2[n] = ref_relu(wrap27(acc));
    end
    acc = longint'(p.b3[0]);
    for (int i = 0; i < 4; i++) acc += ref_mult(h2[i], longint'(p.w3[0][i]));
    out3 = wrap27(acc);
    prob = ref_sig_entry(ref_sig_addr(out3));
    st   = (ref_sig_addr(out3) >= 2048);
  endfunction

  // A hand-made model that decides |1> when I is above its mean:
  // h = relu(+-(norm_i - 0.5) * 4), g = relu(+-(h0 - h1) * 2), out = (g0 - g1) * 8.
  function automatic fnn_params_t sign_model(int n_i, longint mu_i);
    fnn_params_t p;
    p = '0;
    p.w1[0][0] = wt_t'(4 <<< 12);  p.b1[0] = fx_t'(-(2 <<< 17));
    p.w1[1][0] = wt_t'(-(4 <<< 12)); p.b1[1] = fx_t'(2 <<< 17);
    p.w2[0][0] = wt_t'(2 <<< 12);  p.w2[0][1] = wt_t'(-(2 <<< 12));
    p.w2[1][0] = wt_t'(-(2 <<< 12)); p.w2[1][1] = wt_t'(2 <<< 12);
    p.w3[0][0] = wt_t'(8 <<< 12);  p.w3[0][1] = wt_t'(-(8 <<< 12));
    p.n_i = 5'(n_i); p.n_q = 5'(n_i);
    p.mu_i = acc_t'(mu_i); p.mu_q = '0;
    return p;
  endfunction

  // random model with small weights and biases
  function automatic fnn_params_t rand_model();
    fnn_params_t p;
    for (int n = 0; n < 8; n++) begin
      for (int i = 0; i < 2; i++) p.w1[n][i] = wt_t'($signed($urandom_range(0, 16383)) - 8192);
      p.b1[n] = fx_t'($signed($urandom_range(0, 131071)) - 65536);
    end
    for (int n = 0; n < 4; n++) begin
      for (int i = 0; i < 8; i++) p.w2[n][i] = wt_t'($signed($urandom_range(0, 16383)) - 8192);
      p.b2[n] = fx_t'($signed($urandom_range(0, 131071)) - 65536);
    end
    for (int i = 0; i < 4; i++) p.w3[0][i] = wt_t'($signed($urandom_range(0, 32767)) - 16384);
    p.b3[0] = fx_t'($signed($urandom_range(0, 131071)) - 65536);
    p.n_i = 5'($urandom_range(18, 24));
    p.n_q = 5'($urandom_range(18, 24));
    p.mu_i = acc_t'($signed($urandom_range(0, 200000)) - 100000);
    p.mu_q = acc_t'($signed($urandom_range(0, 200000)) - 100000);
    return p;
  endfunction

  // word i of the parameter memory image of p
  function automatic logic [31:0] param_word(fnn_params_t p, int a);
    if (a < PA_B1)  return 32'(p.w1[(a - PA_W1) / 2][(a - PA_W1) % 2]);
    if (a < PA_W2)  return 32'(p.b1[a - PA_B1]);
    if (a < PA_B2)  return 32'(p.w2[(a - PA_W2) / 8][(a - PA_W2) % 8]);
    if (a < PA_W3)  return 32'(p.b2[a - PA_B2]);
    if (a < PA_B3)  return 32'(p.w3[0][a - PA_W3]);
    if (a == PA_B3) return 32'(p.b3[0]);
    if (a == PA_NI) return 32'(p.n_i);
    if (a == PA_NQ) return 32'(p.n_q);
    if (a == PA_MUI) return 32'(p.mu_i);
    return 32'(p.mu_q);
  endfunction
endpackage
