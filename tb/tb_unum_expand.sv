// tb_unum_expand: self-checking test of unum_expand.
//
// Random exact unums of every exponent size up to 8 and every fraction size
// must keep their value after expansion and come out at es=16, fs=32 with a
// normalised significand. Inexact single unums must turn into the ubound of
// their open interval (x, x+ulp), ordered by value; ubounds keep both values
// and open flags; NaN, infinity and zero follow their summary bits. Reference
// values are computed with real arithmetic from the format definition.
module tb_unum_expand;
  import unum_pkg::*;
  import tb_unum_ref::*;

  ubound_t op, res;
  logic    isub;
  int      checks = 0, failures = 0;

  unum_expand dut (.op_i(op), .op_o(res), .is_ubound_o(isub));

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

  initial begin
    unum_t a, b;
    real   va, vb;
    // exact single unums
    for (int i = 0; i < 3000; i++) begin
      a  = rnd_unum(8);
      op = '0; op.left = a;
      #1;
      check(uval(res.left) == uval(a), "value kept");
      check(res.left.esm1 == 4'd15 && res.left.fsm1 == 5'd31, "expanded sizes");
      check(res.left.e != '0 || uval(a) == 0.0, "normalised");
      check(!isub && !res.left.second, "stays single");
    end
    // inexact single unums -> ubound (x, x+ulp)
    for (int i = 0; i < 2000; i++) begin
      a   = rnd_unum(8);
      a.u = 1'b1; a.zero = 1'b0;
      op  = '0; op.left = a;
      #1;
      va = uval(a);
      vb = va + (a.s ? -uulp(a) : uulp(a));
      check(isub && res.left.second, "inexact becomes ubound");
      check(res.left.u && res.right.u, "both ends open");
      if (a.s) check(uval(res.left) == vb && uval(res.right) == va, "negative interval");
      else     check(uval(res.left) == va && uval(res.right) == vb, "positive interval");
    end
    // ubounds
    for (int i = 0; i < 1000; i++) begin
      a = rnd_unum(8); b = rnd_unum(8);
      a.u = 1'($urandom); b.u = 1'($urandom); a.zero = 1'b0; b.zero = 1'b0;
      a.second = 1'b1;
      op = {b, a};
      #1;
      check(isub && res.left.second && !res.right.second, "ubound flags");
      check(uval(res.left) == uval(a) && uval(res.right) == uval(b), "ubound values");
      check(res.left.u == a.u && res.right.u == b.u, "ubound open flags");
    end
    // specials
    op = '0; op.left = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFF, 1'b1); op.left.nan = 1'b1;
    #1 check(res.left.nan && res.left.e == 16'hFFFF && res.left.f == '1 && res.left.u, "NaN");
    op = '0; op.left = mk(1'b1, 16, 32, 64'hFFFF, 64'hFFFF_FFFF, 1'b0); op.left.inf = 1'b1;
    #1 check(res.left.inf && res.left.s && !res.left.u && !isub, "-inf");
    op = '0; op.left = mk(1'b0, 3, 4, 0, 0, 1'b0);
    #1 check(res.left.zero && res.left.e == '0 && res.left.f == '0, "zero");
    // largest finite with ubit: (maxreal, inf)
    op = '0; op.left = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFE, 1'b1);
    #1 check(isub && res.right.inf && res.right.u && !res.right.nan, "(maxreal, inf)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
