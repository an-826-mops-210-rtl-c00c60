// tb_unum_optimize: self-checking test of unum_optimize.
//
// Random exact unums of all exponent and fraction sizes are expanded by the
// reference and optimised; the result must keep the value and use no more
// bits than the smallest exact encoding found by trying every es and fs. An
// inexact single unum must keep its fraction size (its ulp). Ubounds keep
// both values and open flags; a ubound that is one point or exactly one open
// unum cell must collapse into that single unum. NaN passes unchanged.
module tb_unum_optimize;
  import unum_pkg::*;
  import tb_unum_ref::*;

  ubound_t op, res;
  int      checks = 0, failures = 0;

  unum_optimize dut (.op_i(op), .res_o(res));

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

  // expanded form of an exact, normal-range value given as unum
  function automatic unum_t to_x(input unum_t a);
    real v, m;
    int  k;
    v = uval(a);
    if (v == 0.0) return mk(a.s, 16, 32, 0, 0, a.u);
    if (v < 0.0) v = -v;
    k = ilog2(v);
    m = (v / p2(k) - 1.0) * p2(32);
    return mk(a.s, 16, 32, longint'(k + 32767), longint'(m), a.u);
  endfunction

  initial begin
    unum_t a, b, x;
    int    cost;
    for (int i = 0; i < 1500; i++) begin
      a  = rnd_unum(9);
      op = '0; op.left = to_x(a);
      #1;
      cost = int'(res.left.esm1) + int'(res.left.fsm1) + 2;
      check(uval(res.left) == uval(a), "value kept");
      check(cost == min_cost(uval(a)), "smallest encoding");
      check(!res.left.u && !res.left.second, "exact single");
      check(res.left.zero == (uval(a) == 0.0), "zero summary");
    end
    // inexact single from the adder: fs=32 kept, es shrinks
    x  = mkx(1'b0, 3, 32'h8000_0001, 1'b1);
    op = '0; op.left = x;
    #1 check(res.left.u && res.left.fsm1 == 5'd31 && res.left.esm1 == 4'd2 &&
             uval(res.left) == uval(x), "inexact keeps ulp");
    // ubound endpoints are compressed independently
    for (int i = 0; i < 300; i++) begin
      a = rnd_unum(8); b = rnd_unum(8);
      a.s = 1'b0; b.s = 1'b0;
      if (uval(a) > uval(b)) begin x = a; a = b; b = x; end
      if (uval(a) == uval(b)) continue;
      a.u = 1'($urandom); b.u = 1'b0;
      op = {to_x(b), to_x(a)}; op.left.second = 1'b1;
      #1;
      check(res.left.second && uval(res.left) == uval(a) && uval(res.right) == uval(b),
            "ubound values");
      check(res.left.u == a.u && !res.right.u, "ubound open flags");
      check(int'(res.left.esm1) + int'(res.left.fsm1) + 2 == min_cost(uval(a)), "ubound lower size");
    end
    // point ubound collapses
    op = {mkx(1'b0, 4, 32'hC000_0000, 1'b0), mkx(1'b0, 4, 32'hC000_0000, 1'b0)};
    op.left.second = 1'b1;
    #1 check(!res.left.second && uval(res.left) == 28.0 && !res.left.u, "point collapses");
    // open cell (3, 3.5) = unum 3 with fs=2 and ubit
    op = {mkx(1'b0, 1, 32'hC000_0000, 1'b1), mkx(1'b0, 1, 32'h8000_0000, 1'b1)};
    op.left.second = 1'b1;
    #1 check(!res.left.second && res.left.u && uval(res.left) == 3.0 && uulp(res.left) == 0.5,
             "cell collapses");
    // negative cell (-3.5, -3)
    op = {mkx(1'b1, 1, 32'h8000_0000, 1'b1), mkx(1'b1, 1, 32'hC000_0000, 1'b1)};
    op.left.second = 1'b1;
    #1 check(!res.left.second && res.left.u && uval(res.left) == -3.0 && uulp(res.left) == 0.5,
             "negative cell collapses");
    // closed ends do not collapse
    op = {mkx(1'b0, 1, 32'hC000_0000, 1'b0), mkx(1'b0, 1, 32'h8000_0000, 1'b1)};
    op.left.second = 1'b1;
    #1 check(res.left.second, "half-open interval stays a ubound");
    // NaN
    op = '0; op.left = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFF, 1'b1); op.left.nan = 1'b1;
    #1 check(res.left == op.left, "NaN unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
