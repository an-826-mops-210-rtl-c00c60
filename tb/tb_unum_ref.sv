// tb_unum_ref: reference helpers for the unum testbenches.
//
// Computes unum values with real arithmetic straight from the definition of
// the format (value, ulp, representability), independent of the RTL package
// functions, and builds test operands. Only the type definitions are shared
// with the design. Values are kept to exponents that a double holds exactly.
package tb_unum_ref;
  import unum_pkg::*;

  function automatic real p2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) repeat (n) r = r * 2.0;
    else        repeat (-n) r = r / 2.0;
    return r;
  endfunction

  function automatic int bias_of(input int es);
    return (1 << (es - 1)) - 1;
  endfunction

  // value of a finite unum slot
  function automatic real uval(input unum_t u);
    int  es, fs, bias;
    real v;
    longint unsigned ev, fv;
    es   = int'(u.esm1) + 1;
    fs   = int'(u.fsm1) + 1;
    bias = bias_of(es);
    ev   = longint'(u.e) & ((64'd1 << es) - 1);
    fv   = longint'(u.f) & ((64'd1 << fs) - 1);
    if (ev != 0) v = (1.0 + real'(fv) / p2(fs)) * p2(int'(ev) - bias);
    else         v = (real'(fv) / p2(fs)) * p2(1 - bias);
    return u.s ? -v : v;
  endfunction

  // ulp of a finite unum slot
  function automatic real uulp(input unum_t u);
    int es, fs, bias;
    longint unsigned ev;
    es   = int'(u.esm1) + 1;
    fs   = int'(u.fsm1) + 1;
    bias = bias_of(es);
    ev   = longint'(u.e) & ((64'd1 << es) - 1);
    if (ev != 0) return p2(int'(ev) - bias - fs);
    else         return p2(1 - bias - fs);
  endfunction

  function automatic unum_t mk(input logic s, input int es, input int fs,
                               input longint unsigned e, input longint unsigned f,
                               input logic u);
    unum_t r;
    r      = '0;
    r.s    = s;
    r.e    = 16'(e);
    r.f    = 32'(f);
    r.u    = u;
    r.esm1 = 4'(es - 1);
    r.fsm1 = 5'(fs - 1);
    r.zero = (e == 0) && (f == 0) && !u;
    return r;
  endfunction

  // expanded (es=16, fs=32) normal value 2^ex * (1 + f/2^32)
  function automatic unum_t mkx(input logic s, input int ex, input logic [31:0] f, input logic u);
    return mk(s, 16, 32, longint'(ex + 32767), longint'(f), u);
  endfunction

  // random exact unum with es <= 8, value away from the ends of the range
  function automatic unum_t rnd_unum(input int max_es);
    int es, fs;
    longint unsigned e, f;
    es = 1 + int'($urandom_range(max_es - 1));
    fs = 1 + int'($urandom_range(31));
    e  = longint'($urandom) & ((64'd1 << es) - 1);
    f  = longint'($urandom) & ((64'd1 << fs) - 1);
    return mk(1'($urandom), es, fs, e, f, 1'b0);
  endfunction

  // floor(log2(a)) for a > 0
  function automatic int ilog2(input real a);
    int k;
    k = 0;
    while (p2(k) > a) k--;
    while (p2(k + 1) <= a) k++;
    return k;
  endfunction

  // smallest es+fs of an exact encoding of v (v exactly representable),
  // by trying every es and fs
  function automatic int min_cost(input real v);
    real a;
    int  best, k;
    a    = (v < 0.0) ? -v : v;
    best = 1000;
    if (a == 0.0) return 2;
    k = ilog2(a);
    for (int es = 1; es <= 16; es++) begin
      int bias;
      bias = bias_of(es);
      for (int fs = 1; fs <= 32; fs++) begin
        real q;
        if (k + bias >= 1 && k + bias <= (1 << es) - 1) begin
          q = a / p2(k - fs);  // normal: significand * 2^fs
        end else begin
          q = a / p2(1 - bias - fs);  // subnormal: fraction * 2^fs
          if (q >= p2(fs)) q = 0.5;
        end
        if (q == $floor(q) && es + fs < best) best = es + fs;
      end
    end
    return best;
  endfunction

endpackage
