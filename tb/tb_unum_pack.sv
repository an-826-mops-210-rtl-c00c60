// tb_unum_pack: self-checking test of unum_pack.
//
// Directed cases: a plain single result with its ubit from the adder's
// inexact flag or the open flag, a ubound result and its layout, NaN and
// infinity from the special bits, and overflow in each rounding direction
// (open infinity when rounded away from zero, open maxreal otherwise).
module tb_unum_pack;
  import unum_pkg::*;

  xval_t      lb, ub;
  logic [2:0] lbf, ubf;
  logic [1:0] opn;
  special_t   sp;
  ubound_t    res;
  int         checks = 0, failures = 0;

  unum_pack dut (.lb_i(lb), .ub_i(ub), .lb_flags_i(lbf), .ub_flags_i(ubf),
                 .open_i(opn), .special_i(sp), .res_o(res));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: res=%h", what, res);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lb = '{s: 1'b0, e: 16'd32768, f: 32'h4000_0000};
    ub = '{s: 1'b0, e: 16'd32769, f: 32'h0};
    lbf = 3'b000; ubf = 3'b000; opn = 2'b00; sp = '0;
    #1 check(res.left.e == 16'd32768 && res.left.f == 32'h4000_0000 && !res.left.u &&
             !res.left.second && res.right == '0 && res.left.esm1 == 4'd15 &&
             res.left.fsm1 == 5'd31, "exact single");
    lbf = 3'b010;
    #1 check(res.left.u, "inexact sets ubit");
    lbf = 3'b000; opn = 2'b01;
    #1 check(res.left.u, "open flag sets ubit");
    sp.ubound = 1'b1; opn = 2'b10;
    #1 check(res.left.second && !res.left.u && res.right.u && res.right.e == 16'd32769 &&
             !res.right.second, "ubound layout");
    lb = '0; lbf = 3'b000; opn = 2'b00;
    #1 check(res.left.zero, "zero summary");
    // specials
    sp = '0; sp.lb = '{special: 1'b1, nan: 1'b1, inf: 1'b0, sign: 1'b0};
    #1 check(res.left.nan && res.left.u && res.left.e == '1 && res.left.f == '1, "NaN");
    sp.lb = '{special: 1'b1, nan: 1'b0, inf: 1'b1, sign: 1'b1};
    #1 check(res.left.inf && res.left.s && !res.left.u && !res.left.nan, "-inf");
    // overflow, single: (maxreal, inf)
    sp = '0; lbf = 3'b100;
    #1 check(!res.left.inf && res.left.u && res.left.e == 16'hFFFF &&
             res.left.f == 32'hFFFF_FFFE, "single overflow");
    // overflow, ubound
    sp.ubound = 1'b1; lbf = 3'b100; ubf = 3'b100;
    #1 check(!res.left.inf && res.left.u && res.left.f == 32'hFFFF_FFFE, "LB overflow up");
    check(res.right.inf && res.right.u && !res.right.s && !res.right.nan, "UB overflow up");
    lbf = 3'b101; ubf = 3'b101;
    #1 check(res.left.inf && res.left.u && res.left.s, "LB overflow down");
    check(!res.right.inf && res.right.u && res.right.s && res.right.f == 32'hFFFF_FFFE,
             "UB overflow down");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
