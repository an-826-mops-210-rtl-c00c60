// tb_unum_fp_add: self-checking test of one bound adder (unum_fp_add).
//
// Random operands with exponents close enough for a double to hold the exact
// sum are added and subtracted in all three rounding modes. The result must
// lie on the right side of the exact sum (below for RND_DOWN, above for
// RND_UP, not above in magnitude for RND_TRUNC), closer than one ulp of the
// 32-bit fraction, and the inexact flag must be set exactly when it differs.
// Directed cases cover cancellation to zero, subnormals and overflow.
module tb_unum_fp_add;
  import unum_pkg::*;
  import tb_unum_ref::*;

  xval_t x, y, r;
  logic  neg, ovf, inx, sgn;
  rnd_e  mode;
  int    checks = 0, failures = 0;

  unum_fp_add dut (.x_i(x), .y_i(y), .neg_y_i(neg), .mode_i(mode),
                   .res_o(r), .ovf_o(ovf), .inexact_o(inx), .sign_o(sgn));

  function automatic real xv(input xval_t v);
    return uval(mk(v.s, 16, 32, longint'(v.e), longint'(v.f), 1'b0));
  endfunction
  function automatic real xulp(input xval_t v);
    return uulp(mk(v.s, 16, 32, longint'(v.e), longint'(v.f), 1'b0));
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: x=%h y=%h neg=%0d mode=%0d r=%h inx=%0d ovf=%0d",
                                  what, x, y, neg, mode, r, inx, ovf);
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
    real t, v, u;
    int  ex;
    for (int i = 0; i < 20000; i++) begin
      ex   = int'($urandom_range(40)) - 20;
      x    = '{s: 1'($urandom), e: 16'(32767 + ex), f: $urandom};
      y    = '{s: 1'($urandom), e: 16'(32767 + ex - int'($urandom_range(19))), f: $urandom};
      if (i % 7 == 0) y.f = x.f;   // provoke cancellation
      neg  = 1'($urandom);
      mode = rnd_e'($urandom_range(2));
      #1;
      t = xv(x) + (neg ? -xv(y) : xv(y));
      v = xv(r);
      u = xulp(r);
      check(!ovf, "no overflow");
      check(inx == (v != t), "inexact flag");
      case (mode)
        RND_DOWN: check(v == t || v <= t && t - v < u, "round down");
        RND_UP:   check(v == t || v >= t && v - t < u, "round up");
        default:  check(v == t || (v >= 0.0 ? v <= t : v >= t) && (v - t < u && t - v < u), "truncate");
      endcase
      check(sgn == (t < 0.0), "int. sign");
    end
    // exact cancellation gives +0
    x = '{s: 1'b1, e: 16'd32770, f: 32'h1234_5678}; y = x; neg = 1'b1; mode = RND_DOWN;
    #1 check(r == '0 && !inx && !sgn, "x - x = +0");
    // subnormal + subnormal stays exact
    x = '{s: 1'b0, e: 16'd0, f: 32'h8000_0001}; y = '{s: 1'b0, e: 16'd0, f: 32'h8000_0001};
    neg = 1'b0; mode = RND_UP;
    #1 check(r.e == 16'd1 && r.f == 32'h0000_0002 && !inx, "subnormal sum becomes normal");
    // overflow
    x = '{s: 1'b0, e: 16'hFFFF, f: 32'hF000_0000}; y = x; neg = 1'b0; mode = RND_UP;
    #1 check(ovf, "overflow");
    x = '{s: 1'b0, e: 16'hFFFF, f: 32'hFFFF_FFFE}; y = '{s: 1'b0, e: 16'd32767, f: 32'h0};
    mode = RND_UP;
    #1 check(ovf && inx, "maxreal + 1 rounded up overflows");
    mode = RND_DOWN;
    #1 check(!ovf && inx && r.f == 32'hFFFF_FFFE, "maxreal + 1 rounded down stays");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
