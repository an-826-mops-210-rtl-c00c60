// tb_unum_unify: self-checking test of unum_unify.
//
// Random positive and negative ubounds in register format (random sizes,
// random open ends, both ends within one binade of each other) are unified.
// When the unit reports a merge, the single unum's interval (x, x+ulp) must
// contain the ubound, honouring open and closed ends, and no cell of the next
// finer fraction size may contain it (smallest cell). Intervals that reach or
// cross zero, single unums and a ubound of one closed point are checked on
// directed cases.
module tb_unum_unify;
  import unum_pkg::*;
  import tb_unum_ref::*;

  ubound_t op, res;
  logic    unified;
  int      checks = 0, failures = 0, merges = 0, wide_merges = 0;

  unum_unify dut (.op_i(op), .res_o(res), .unified_o(unified));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: in=%h out=%h", what, op, res);
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // does the open cell of size u starting at x (magnitudes) hold lo..hi?
  function automatic logic holds(input real x, input real u, input real lo, input logic lo_open,
                                 input real hi, input logic hi_open);
    return (x < lo || (x == lo && lo_open)) && (hi < x + u || (hi == x + u && hi_open));
  endfunction

  // is 2^k the ulp of a subnormal unum of some es, fs?
  function automatic logic in_k(input int k);
    for (int es = 1; es <= 16; es++)
      if (k <= -bias_of(es) && k >= -bias_of(es) - 31) return 1'b1;
    return 1'b0;
  endfunction

  // width of the narrowest unum cell holding lo..hi (magnitudes, lo >= 0),
  // from the definition: normal cells of every fs in lo's binade, the whole
  // binade, and the cells (0, 2^k); 0.0 if none holds it
  function automatic real ref_width(input real lo, input logic lo_open, input real hi,
                                    input logic hi_open);
    int  e;
    real x, w;
    if (lo > 0.0) begin
      e = ilog2(lo);
      for (int fs = 32; fs >= 1; fs--) begin
        w = p2(e - fs);
        x = $floor(lo / w) * w;
        if (holds(x, w, lo, lo_open, hi, hi_open)) return w;
      end
      if (in_k(e) && holds(p2(e), p2(e), lo, lo_open, hi, hi_open)) return p2(e);
    end
    for (int k = ilog2(hi) - 1; k <= 1; k++)
      if (in_k(k) && holds(0.0, p2(k), lo, lo_open, hi, hi_open)) return p2(k);
    return 0.0;
  endfunction

  initial begin
    unum_t a, b, t;
    real   lo, hi, x, u, xf;
    logic  lo_open, hi_open;
    for (int i = 0; i < 4000; i++) begin
      // two values in the same or the next binade
      a = mk(1'b0, 6, 1 + int'($urandom_range(31)), 40, longint'($urandom), 1'($urandom));
      a.f = a.f & 32'((64'd1 << (int'(a.fsm1) + 1)) - 1);
      b = a;
      b.f = $urandom & 32'((64'd1 << (int'(b.fsm1) + 1)) - 1);
      if ($urandom_range(3) == 0) b.e = 16'd41;
      b.u = 1'($urandom);
      if (uval(a) > uval(b)) begin t = a; a = b; b = t; end
      if (uval(a) == uval(b)) continue;
      if ($urandom_range(1) == 1) begin  // negative interval
        a.s = 1'b1; b.s = 1'b1;
        t = a; a = b; b = t;
      end
      a.zero = 1'b0; b.zero = 1'b0;
      op = {b, a}; op.left.second = 1'b1;
      #1;
      lo      = a.s ? -uval(b) : uval(a);
      hi      = a.s ? -uval(a) : uval(b);
      lo_open = a.s ? b.u : a.u;
      hi_open = a.s ? a.u : b.u;
      if (unified) begin
        merges++;
        x = res.left.s ? -uval(res.left) : uval(res.left);
        u = uulp(res.left);
        check(!res.left.second && res.left.u, "single inexact result");
        check(res.left.s == a.s, "sign");
        check(holds(x, u, lo, lo_open, hi, hi_open), "cell holds the interval");
        if (res.left.fsm1 != 5'd31) begin
          xf = $floor(lo / (u / 2.0)) * (u / 2.0);
          check(!holds(xf, u / 2.0, lo, lo_open, hi, hi_open) &&
                !(xf == lo && !lo_open && holds(xf - u / 2.0, u / 2.0, lo, lo_open, hi, hi_open)),
                "no finer cell holds it");
        end
      end else begin
        check(res == op, "unchanged when not unified");
      end
    end
    check(merges > 1000, "most intervals merge");
    // wide intervals, intervals from zero, across many binades: the result
    // must be the narrowest of all cells a unum can be
    for (int i = 0; i < 3000; i++) begin
      real w, wr;
      int  ea, eb;
      logic s;
      eb = 1 + int'($urandom_range(253));
      ea = ($urandom_range(3) == 0) ? 0 : 1 + int'($urandom_range(eb - 1));
      b  = mk(1'b0, 8, 1 + int'($urandom_range(31)), longint'(eb), longint'($urandom), 1'($urandom));
      a  = mk(1'b0, 8, 1 + int'($urandom_range(31)), longint'(ea), longint'($urandom), 1'($urandom));
      if (ea == 0 && $urandom_range(1) == 0) a.f = '0;
      if (ea == eb || uval(a) >= uval(b)) continue;
      s = 1'($urandom);
      if (s) begin
        a.s = 1'b1; b.s = 1'b1;
        t = a; a = b; b = t;
      end
      a.zero = (a.f == '0 && a.e == '0 && !a.u);
      b.zero = (b.f == '0 && b.e == '0 && !b.u);
      op = {b, a}; op.left.second = 1'b1;
      #1;
      lo      = s ? -uval(b) : uval(a);
      hi      = s ? -uval(a) : uval(b);
      lo_open = s ? b.u : a.u;
      hi_open = s ? a.u : b.u;
      wr = ref_width(lo, lo_open, hi, hi_open);
      if (wr > 0.0) begin
        if (unified) wide_merges++;
        check(unified && !res.left.second && res.left.u && res.left.s == s, "wide interval merges");
        x = res.left.s ? -uval(res.left) : uval(res.left);
        w = uulp(res.left);
        check(holds(x, w, lo, lo_open, hi, hi_open), "wide: cell holds the interval");
        check(w == wr, "wide: narrowest cell");
      end else begin
        check(!unified && res == op, "wide: unchanged when no cell holds it");
      end
    end
    check(wide_merges > 1000, "most wide intervals merge");
    // (maxreal, inf) and (5, inf)
    a = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFE, 1'b1);
    op = {mk_inf(1'b0, 1'b1), a}; op.left.second = 1'b1;
    #1 check(unified && !res.left.second && res.left.u && res.left.e == 16'hFFFF &&
             res.left.f == 32'hFFFF_FFFE && res.left.esm1 == 4'd15 && res.left.fsm1 == 5'd31,
             "(maxreal, inf)");
    op = {mk_inf(1'b0, 1'b1), mk(1'b0, 3, 4, 5, 4, 1'b1)}; op.left.second = 1'b1;
    #1 check(!unified && res == op, "(5, inf) stays");
    // [0, 1]: closed zero end, no cell holds it
    a = '0; a.zero = 1'b1; a.esm1 = 4'd2; a.fsm1 = 5'd3;
    op = {mk(1'b0, 3, 4, 3, 0, 1'b0), a}; op.left.second = 1'b1;
    #1 check(!unified && res == op, "closed zero end stays");
    // [1.25, 1.75]: no fs >= 1 cell holds it, the binade (1, 2) does
    op = {mk(1'b0, 3, 4, 3, 12, 1'b0), mk(1'b0, 3, 4, 3, 4, 1'b0)}; op.left.second = 1'b1;
    #1 check(unified && uval(res.left) == 1.0 && uulp(res.left) == 1.0 && res.left.e == '0 &&
             res.left.f == 32'd1, "[1.25, 1.75] -> (1, 2)");
    // (0, 1]: the widest zero cell is (0, 1), at es=1, fs=1: stays
    a.zero = 1'b0; a.u = 1'b1;
    op = {mk(1'b0, 3, 4, 3, 0, 1'b0), a}; op.left.second = 1'b1;
    #1 check(!unified && res == op, "(0, 1] stays");
    // (0, 1): exactly that cell
    op = {mk(1'b0, 3, 4, 3, 0, 1'b1), a}; op.left.second = 1'b1;
    #1 check(unified && uval(res.left) == 0.0 && uulp(res.left) == 1.0 &&
             res.left.esm1 == 4'd0 && res.left.fsm1 == 5'd0, "(0, 1) -> inexact zero of es=1, fs=1");
    // crossing zero: unchanged
    a = mk(1'b1, 3, 4, 3, 5, 1'b0); b = mk(1'b0, 3, 4, 3, 5, 1'b0);
    op = {b, a}; op.left.second = 1'b1;
    #1 check(!unified && res == op, "zero crossing stays");
    // point
    op = {a, a}; op.left.second = 1'b1;
    #1 check(unified && !res.left.second && !res.left.u && uval(res.left) == uval(a), "point");
    // single unum passes
    op = '0; op.left = b;
    #1 check(!unified && res == op, "single passes");
    // [1, 2): unum 1 with ubit at fs=1 is (1, 1.5); needs (1, 2) -> not at normal fs>=1
    op = {mk(1'b0, 2, 1, 2, 0, 1'b1), mk(1'b0, 2, 1, 1, 1, 1'b1)};  // (1.5, 2) open
    op.left.second = 1'b1;
    #1 check(unified && uval(res.left) == 1.5 && uulp(res.left) == 0.5, "(1.5, 2) is one cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
