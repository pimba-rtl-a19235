// mx_ref_pkg: reference arithmetic for the testbenches. Decodes every Pimba
// number format to a real value with plain loops and powers of two, so the
// checks compare the RTL against ordinary real arithmetic rather than against
// a copy of its own bit manipulations. Also holds random-operand helpers.
package mx_ref_pkg;
  import pimba_pkg::*;

  function automatic real p2(int n);
    real r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real abs_r(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // value of element e of an MX8 group
  function automatic real mx8_val(mx8_group_t g, int e);
    int  m   = int'(g.elem[e][5:0]);
    int  mu  = int'(g.micro[e/2]);
    real v   = real'(m) * p2(int'(g.exp) - 127 - mu - 5);
    return g.elem[e][6] ? -v : v;
  endfunction

  function automatic real word_val(mx8_word_t w, int j);
    return mx8_val(w[j/16], j%16);
  endfunction

  function automatic real mxw_val(mxw_group_t g, int e);
    real v = real'(g.mag[e]) * p2(int'(g.exp) - 127 - int'(g.micro[e/2]) - 10);
    return g.sign[e] ? -v : v;
  endfunction

  function automatic real mxs_val(mxs_group_t g, int e);
    return real'($signed(g.val[e])) * p2(int'(g.exp) - 127 - 14);
  endfunction

  function automatic real acc_val(acc_scalar_t a);
    return real'(a.mant) * p2(int'(a.exp) - 12);
  endfunction

  // one unit in the last place of an MX8 group with microexponent 0
  function automatic real ulp8(mx8_group_t g);
    return p2(int'(g.exp) - 127 - 5);
  endfunction

  function automatic mx8_group_t rand_group(int lo, int hi);
    mx8_group_t g;
    g.exp   = 8'(lo + int'($urandom_range(hi - lo)));
    g.micro = 8'($urandom);
    for (int e = 0; e < 16; e++) g.elem[e] = 7'($urandom);
    return g;
  endfunction

  function automatic mx8_word_t rand_word(int lo, int hi);
    mx8_word_t w;
    for (int g = 0; g < 2; g++) w[g] = rand_group(lo, hi);
    return w;
  endfunction

  // fp16 encode of a real (round toward zero), for quantizer tests
  function automatic logic [15:0] to_fp16(real x);
    logic s = (x < 0.0);
    real  a = abs_r(x);
    int   e = 0;
    if (a == 0.0) return 16'h0000;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    return {s, 5'(e + 15), 10'(int'((a - 1.0) * 1024.0 - 0.5))};
  endfunction

  function automatic real fp16_val(logic [15:0] h);
    real v;
    if (h[14:10] == 0) return 0.0;
    v = (1.0 + real'(h[9:0]) / 1024.0) * p2(int'(h[14:10]) - 15);
    return h[15] ? -v : v;
  endfunction

  // expected element j of the updated state d.*S + k*v[eidx]
  function automatic real su_ref(mx8_word_t st, mx8_word_t d, mx8_word_t k,
                                 mx8_word_t v, int eidx, int j);
    return word_val(d, j) * word_val(st, j) + word_val(k, j) * word_val(v, eidx);
  endfunction

  function automatic real dot_ref(mx8_word_t a, mx8_word_t b);
    real s = 0.0;
    for (int j = 0; j < 32; j++) s += word_val(a, j) * word_val(b, j);
    return s;
  endfunction

  // number of elements of `got` farther than ntol ulps from `want`
  function automatic int word_err(mx8_word_t got, real want [32], real ntol);
    int n = 0;
    for (int j = 0; j < 32; j++)
      if (abs_r(word_val(got, j) - want[j]) > ntol * ulp8(got[j/16])) n++;
    return n;
  endfunction
endpackage
