// r2f2_tb_pkg: reference functions shared by the R2F2 testbenches.
//
// decode() gives the real value of an R2F2 word <eb,mb,fx> with k flexible exponent bits
// straight from the format definition (sign, biased exponent 2^(eb+k-1)-1, implicit 1,
// fraction of mb+fx-k bits), written independently of the RTL's bit manipulation.
// fp32_real() gives the value of a single-precision pattern, real_fp32() the
// reverse; rel_err() is |x-ref|/|ref|.
package r2f2_tb_pkg;

  function automatic int exp_val(input longint unsigned w, input int eb, input int mb,
                                 input int fx, input int k);
    longint unsigned fe, fl;
    fe = (w >> (mb + fx)) & ((64'd1 << eb) - 1);
    fl = w & ((64'd1 << fx) - 1);
    return int'(fe * (64'd1 << k) + (fl >> (fx - k)));
  endfunction

  function automatic longint unsigned frac_val(input longint unsigned w, input int mb,
                                               input int fx, input int k);
    longint unsigned fm, fl;
    fm = (w >> fx) & ((64'd1 << mb) - 1);
    fl = w & ((64'd1 << (fx - k)) - 1);
    return fm * (64'd1 << (fx - k)) + fl;
  endfunction

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real decode(input longint unsigned w, input int eb, input int mb,
                                 input int fx, input int k);
    int  e, bias, nf;
    real v;
    e    = exp_val(w, eb, mb, fx, k);
    bias = (1 << (eb + k - 1)) - 1;
    nf   = mb + fx - k;
    if (e == 0) return 0.0;
    v = pow2(e - bias) * (1.0 + real'(frac_val(w, mb, fx, k)) / pow2(nf));
    if ((w >> (1 + eb + mb + fx - 1)) & 1) v = -v;
    return v;
  endfunction

  // Builds a word from sign, biased exponent and fraction (mb+fx-k bits).
  function automatic longint unsigned encode(input int s, input int e,
                                             input longint unsigned f, input int eb,
                                             input int mb, input int fx, input int k);
    longint unsigned w;
    longint unsigned ue;
    ue = longint'(e);
    w  = longint'(s) << (eb + mb + fx);
    w |= (ue >> k) << (mb + fx);
    w |= (f >> (fx - k)) << fx;
    w |= (ue & ((64'd1 << k) - 1)) << (fx - k);
    w |= f & ((64'd1 << (fx - k)) - 1);
    return w;
  endfunction

  // Real value of an IEEE single-precision bit pattern (normal numbers and zero).
  function automatic real fp32_real(input logic [31:0] x);
    real v;
    if (x[30:23] == 8'd0) return 0.0;
    v = pow2(int'(x[30:23]) - 127) * (1.0 + real'(x[22:0]) / pow2(23));
    return x[31] ? -v : v;
  endfunction

  // Nearest single-precision pattern of a real (round half up, no subnormals).
  function automatic logic [31:0] real_fp32(input real x);
    logic s;
    int   e;
    real  m;
    longint unsigned f;
    if (x == 0.0) return 32'h0;
    s = (x < 0);
    m = s ? -x : x;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    f = longint'((m - 1.0) * pow2(23));   // the cast rounds to nearest
    if (f == (64'd1 << 23)) begin f = 0; e++; end
    if (e + 127 <= 0) return {s, 31'h0};
    if (e + 127 >= 255) return {s, 8'hFF, 23'h0};
    return {s, 8'(e + 127), 23'(f)};
  endfunction

  function automatic real rel_err(input real x, input real r);
    real d;
    d = x - r;
    if (d < 0) d = -d;
    if (r < 0) r = -r;
    if (r == 0.0) return d;
    return d / r;
  endfunction

endpackage
