// tb_ref_pkg: bit-exact reference arithmetic for the testbenches, written
// from the number-format definitions (Q7.8 data, exact accumulation, shift
// and saturate) rather than from the RTL. The elementwise approximations
// gelu_q and exp_q16 are taken from m3vit_pkg, where they are defined.
package tb_ref_pkg;
  import m3vit_pkg::*;

  // layer norm of one vector with gamma/beta
  function automatic void ref_ln(input data_t x [], input data_t g [], input data_t b [],
                                 ref data_t y []);
    int n = x.size();
    longint recip = (longint'(1) << 24) / n;
    longint s = 0, sq = 0, v, sd, inv;
    data_t mean;
    for (int i = 0; i < n; i++) s += x[i];
    mean = sat16((s * recip) >>> 24);
    for (int i = 0; i < n; i++) sq += (longint'(x[i]) - mean) * (longint'(x[i]) - mean);
    v = ((sq * recip) >>> 24) + 1;
    if (v > 64'hffff_ffff) v = 64'hffff_ffff;
    sd = 0;
    while ((sd + 1) * (sd + 1) <= v) sd++;
    inv = 65536 / sd;
    for (int i = 0; i < n; i++) begin
      data_t z;
      z = sat16(((longint'(x[i]) - mean) * inv) >>> 8);
      y[i] = qadd(qmul(z, g[i]), b[i]);
    end
  endfunction

  // softmax of s[0..n-1] in Q7.8
  function automatic void ref_softmax(input data_t s [], ref data_t p []);
    int n = s.size();
    data_t m = s[0];
    longint sum = 0, r;
    logic [16:0] e [] = new[n];
    for (int i = 1; i < n; i++) if (s[i] > m) m = s[i];
    for (int i = 0; i < n; i++) begin e[i] = exp_q16(sat16(64'(s[i]) - 64'(m))); sum += e[i]; end
    r = (longint'(1) << 32) / sum;
    for (int i = 0; i < n; i++) p[i] = data_t'((longint'(e[i]) * r) >> 24);
  endfunction

  function automatic data_t dot_q(input data_t a [], input data_t b []);
    acc_t s = 0;
    for (int i = 0; i < a.size(); i++) s += acc_t'(a[i]) * acc_t'(b[i]);
    return acc_to_data(s);
  endfunction
endpackage
