// tb_unum_ubound_adder: self-checking test of unum_ubound_adder.
//
// Random expanded unums and ubounds (with random open ends) are added and
// subtracted in all four operand mixes. The reference is interval arithmetic
// on reals: [a,b] + [c,d] = [a+c, b+d] and [a,b] - [c,d] = [a-d, b-c]. Each
// result bound must hold the exact bound (lower at or below, upper at or
// above), lie within one ulp of it, and be open exactly when an operand end
// was open or it had to be rounded. A single-unum sum must truncate toward
// zero and set its ubit when inexact. Results must appear exactly one cycle
// after the operation, one operation per cycle.
module tb_unum_ubound_adder;
  import unum_pkg::*;
  import tb_unum_ref::*;

  logic    clk = 1'b0, rst_n = 1'b0, valid = 1'b0, b1, b2, sub, vo;
  ubound_t op1, op2, res;
  int      checks = 0, failures = 0;

  unum_ubound_adder dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .op1_i(op1),
                         .op2_i(op2), .b1_i(b1), .b2_i(b2), .sub_i(sub),
                         .valid_o(vo), .res_o(res));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: op1=%h op2=%h b=%0d%0d sub=%0d res=%h",
                                  what, op1, op2, b2, b1, sub, res);
    end
  endtask

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic unum_t rnd_x(input int ex0);
    return mkx(1'($urandom), ex0 - int'($urandom_range(12)), $urandom, 1'($urandom));
  endfunction

  // makes an ordered ubound from two values
  function automatic ubound_t mk_ub(input unum_t p, input unum_t q);
    ubound_t r;
    if (uval(p) <= uval(q)) r = {q, p};
    else                    r = {p, q};
    r.left.second = 1'b1;
    return r;
  endfunction

  initial begin
    real     lo, hi, v, w;
    logic    olo, ohi;
    int      ex0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 5000; i++) begin
      ex0 = int'($urandom_range(20));
      b1  = 1'($urandom);
      b2  = 1'($urandom);
      sub = 1'($urandom);
      op1 = b1 ? mk_ub(rnd_x(ex0), rnd_x(ex0)) : ubound_t'({64'd0, rnd_x(ex0)});
      op2 = b2 ? mk_ub(rnd_x(ex0), rnd_x(ex0)) : ubound_t'({64'd0, rnd_x(ex0)});
      if (!b1) op1.left.u = 1'b0;   // single inputs are exact after expansion
      if (!b2) op2.left.u = 1'b0;
      valid <= 1'b1;
      @(posedge clk);
      valid <= 1'b0;
      #1;
      check(vo, "latency one cycle");
      begin
        real a, b, c, d;
        logic ua, ub_, uc, ud;
        a = uval(op1.left); b = b1 ? uval(op1.right) : a;
        c = uval(op2.left); d = b2 ? uval(op2.right) : c;
        ua = op1.left.u; ub_ = b1 ? op1.right.u : ua;
        uc = op2.left.u; ud = b2 ? op2.right.u : uc;
        if (!sub) begin lo = a + c; hi = b + d; olo = ua | uc; ohi = ub_ | ud; end
        else      begin lo = a - d; hi = b - c; olo = ua | ud; ohi = ub_ | uc; end
      end
      if (b1 || b2) begin
        v = uval(res.left); w = uval(res.right);
        check(res.left.second, "ubound result");
        check(v <= lo && (v == lo || lo - v < uulp(res.left)), "lower bound");
        check(w >= hi && (w == hi || w - hi < uulp(res.right)), "upper bound");
        check(res.left.u == (olo || v != lo), "lower open flag");
        check(res.right.u == (ohi || w != hi), "upper open flag");
      end else begin
        v = uval(res.left);
        check(!res.left.second, "single result");
        check(v == lo || ((v >= 0.0) ? (v <= lo && lo - v < uulp(res.left))
                                     : (v >= lo && v - lo < uulp(res.left))), "single value");
        check(res.left.u == (v != lo), "single ubit");
      end
    end
    // back-to-back issue: one result per cycle
    op1 = {64'd0, mkx(1'b0, 0, 32'h0, 1'b0)};  // 1.0
    op2 = {64'd0, mkx(1'b0, 1, 32'h0, 1'b0)};  // 2.0
    b1 = 0; b2 = 0; sub = 0;
    valid <= 1'b1;
    @(posedge clk);
    op1 = {64'd0, mkx(1'b0, 2, 32'h0, 1'b0)};  // 4.0
    @(posedge clk);
    #1 check(vo && uval(res.left) == 6.0, "pipelined result 2");
    valid <= 1'b0;
    @(posedge clk);
    #1 check(!vo, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
