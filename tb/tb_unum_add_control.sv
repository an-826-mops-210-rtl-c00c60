// tb_unum_add_control: self-checking test of the ubound adder control.
//
// Walks all combinations of b1, b2 and add/sub and checks the operand choice
// against the operation table (which endpoint each bound adder adds), the
// rounding modes and the open flags (OR of the two selected ubits). Then it
// checks the NaN and infinity rules on directed cases.
module tb_unum_add_control;
  import unum_pkg::*;

  logic            b1, b2, sub;
  logic [3:0][2:0] s;
  logic [3:0]      sgn;
  add_ctrl_t       c;
  special_t        sp;
  int              checks = 0, failures = 0;

  unum_add_control dut (.b1_i(b1), .b2_i(b2), .sub_i(sub), .s_i(s), .sgn_i(sgn),
                        .ctrl_o(c), .special_o(sp));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: b2b1=%0d%0d sub=%0d", what, b2, b1, sub);
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
    // endpoint chosen as {lb_x, lb_y, ub_x, ub_y}: 0=a 1=b 2=c 3=d
    int exp_lb_y, exp_ub_x, exp_ub_y, lby, ubx, uby;
    for (int k = 0; k < 8; k++) begin
      {sub, b2, b1} = 3'(k);
      s = '0; sgn = '0;
      #1;
      // table of the paper's adder diagram
      case ({b2, b1})
        2'b00: begin exp_lb_y = 2; exp_ub_x = 0; exp_ub_y = 2; end
        2'b01: begin exp_lb_y = 2; exp_ub_x = 1; exp_ub_y = 2; end
        2'b10: begin exp_lb_y = sub ? 3 : 2; exp_ub_x = 0; exp_ub_y = sub ? 2 : 3; end
        default: begin exp_lb_y = sub ? 3 : 2; exp_ub_x = 1; exp_ub_y = sub ? 2 : 3; end
      endcase
      lby = c.lb_y_d ? 3 : 2;
      ubx = c.ub_x_b ? 1 : 0;
      uby = c.ub_y_d ? 3 : 2;
      check(lby == exp_lb_y, "LB second operand");
      if (b1 || b2) begin
        check(ubx == exp_ub_x, "UB first operand");
        check(uby == exp_ub_y, "UB second operand");
      end
      check(c.neg == sub, "subtract");
      check(c.lb_mode == ((b1 || b2) ? RND_DOWN : RND_TRUNC), "LB rounding");
      check(c.ub_mode == RND_UP, "UB rounding");
      check(sp.ubound == (b1 || b2), "ubound result");
      // open flags follow the selected ubits
      for (int e = 0; e < 4; e++) begin
        s = '0; s[e][2] = 1'b1;
        #1;
        check(c.lb_open == (e == 0 || e == exp_lb_y), "LB open flag");
        if (b1 || b2) check(c.ub_open == (e == exp_ub_x || e == exp_ub_y), "UB open flag");
        check(!sp.lb.special, "no special");
      end
    end
    // special cases on a + c, single unums
    b1 = 0; b2 = 0; sub = 0; sgn = '0;
    s = '0; s[0] = 3'b010;                      // a NaN
    #1 check(sp.lb.special && sp.lb.nan, "NaN propagates");
    s = '0; s[0] = 3'b001; s[2] = 3'b001; sgn[2] = 1'b1;  // +inf + -inf, closed
    #1 check(sp.lb.special && sp.lb.nan, "inf - inf is NaN");
    s = '0; s[0] = 3'b001; sgn = '0;            // +inf + c
    #1 check(sp.lb.special && sp.lb.inf && !sp.lb.sign && !c.lb_open, "inf + x");
    sub = 1; s = '0; s[2] = 3'b001;             // a - (+inf) = -inf
    #1 check(sp.lb.special && sp.lb.inf && sp.lb.sign, "x - inf");
    sub = 0; s = '0; s[0] = 3'b101; s[2] = 3'b001; sgn[2] = 1'b1;  // open +inf + closed -inf
    #1 check(sp.lb.special && sp.lb.inf && sp.lb.sign && !c.lb_open, "closed inf wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
