// tb_unum_alu: self-checking test of the whole unum ALU.
//
// Issues a stream of random ADD, SUB, OPT and UNIFY operations, one per
// cycle, on register-format operands of random sizes (exact unums, inexact
// unums and ubounds) and checks every result two cycles later:
//   ADD/SUB  the result interval holds the exact interval sum/difference and
//            is tight to one ulp, and it is already compressed: every finite
//            bound uses the smallest exact encoding;
//   OPT      same value(s), smallest encoding;
//   UNIFY    the single unum holds the ubound (or the operand is unchanged).
// Values are worked out with real arithmetic from the format definition.
module tb_unum_alu;
  import unum_pkg::*;
  import tb_unum_ref::*;

  logic    clk = 1'b0, rst_n = 1'b0, valid = 1'b0, vo;
  alu_op_e op;
  ubound_t op1, op2, res;
  int      checks = 0, failures = 0;
  int      n_add = 0, n_opt = 0, n_uni = 0, n_inexact = 0, n_ubound = 0;

  unum_alu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .op_i(op),
                .op1_i(op1), .op2_i(op2), .valid_o(vo), .res_o(res));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: res=%h", what, res);
    end
  endtask

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // interval [lo, hi] with open flags of a register operand
  task automatic interval(input ubound_t v, output real lo, output real hi,
                          output logic lo_open, output logic hi_open);
    if (v.left.second) begin
      lo = uval(v.left); hi = uval(v.right); lo_open = v.left.u; hi_open = v.right.u;
    end else if (v.left.u) begin
      lo = uval(v.left); hi = lo + (v.left.s ? -uulp(v.left) : uulp(v.left));
      if (v.left.s) begin real t; t = lo; lo = hi; hi = t; end
      lo_open = 1'b1; hi_open = 1'b1;
    end else begin
      lo = uval(v.left); hi = lo; lo_open = 1'b0; hi_open = 1'b0;
    end
  endtask

  function automatic unum_t rnd_op();
    unum_t a;
    a = rnd_unum(7);
    return a;
  endfunction

  function automatic ubound_t rnd_operand(input int kind);
    unum_t   a, b, t;
    ubound_t r;
    a = rnd_op();
    r = '0;
    if (kind == 0) begin
      r.left = a;
    end else if (kind == 1) begin
      a.u = 1'b1; a.zero = 1'b0; r.left = a;
    end else begin
      b = rnd_op();
      if (uval(a) > uval(b)) begin t = a; a = b; b = t; end
      a.u = 1'($urandom); b.u = 1'($urandom);
      if (uval(a) == uval(b)) begin a.u = 1'b0; b.u = 1'b0; end
      a.zero = a.zero & !a.u; b.zero = b.zero & !b.u;
      r = {b, a}; r.left.second = 1'b1;
    end
    return r;
  endfunction

  // expected results, in issue order
  alu_op_e q_op [$];
  ubound_t q_a [$], q_b [$];

  task automatic check_min(input unum_t u);
    if (!u.nan && !u.inf && !(u.u && !u.second && u.fsm1 == 5'd31))
      check(int'(u.esm1) + int'(u.fsm1) + 2 <= min_cost(uval(u)) ||
            (u.u && !u.second), "compressed");
  endtask

  task automatic check_result();
    alu_op_e o;
    ubound_t a, b;
    real     alo, ahi, blo, bhi, lo, hi, rlo, rhi;
    logic    alo_o, ahi_o, blo_o, bhi_o, rlo_o, rhi_o;
    o = q_op.pop_front(); a = q_a.pop_front(); b = q_b.pop_front();
    interval(a, alo, ahi, alo_o, ahi_o);
    interval(b, blo, bhi, blo_o, bhi_o);
    interval(res, rlo, rhi, rlo_o, rhi_o);
    if (res.left.u) n_inexact++;
    if (res.left.second) n_ubound++;
    case (o)
      OP_ADD, OP_SUB: begin
        n_add++;
        if (o == OP_ADD) begin lo = alo + blo; hi = ahi + bhi; end
        else             begin lo = alo - bhi; hi = ahi - blo; end
        check(rlo <= lo && rhi >= hi, "result holds the exact interval");
        check(lo - rlo <= (hi - lo) + 1.0e-6 * (lo < 0.0 ? -lo : lo) + 1.0e-30 &&
              rhi - hi <= (hi - lo) + 1.0e-6 * (hi < 0.0 ? -hi : hi) + 1.0e-30, "result is tight");
        if (res.left.second) begin check_min(res.left); check_min(res.right); end
        else if (!res.left.u) check_min(res.left);
      end
      OP_OPT: begin
        n_opt++;
        check(rlo == alo && rhi == ahi && rlo_o == alo_o && rhi_o == ahi_o, "optimize keeps the set");
        if (res.left.second) begin check_min(res.left); check_min(res.right); end
        else if (!res.left.u) check_min(res.left);
      end
      default: begin
        n_uni++;
        if (a.left.second && !res.left.second) begin
          check(rlo <= alo && rhi >= ahi, "unify holds the ubound");
        end else begin
          check(res == a, "unify leaves it unchanged");
        end
      end
    endcase
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      valid <= 1'b1;
      op    <= alu_op_e'($urandom_range(3));
      op1   <= rnd_operand(int'($urandom_range(2)));
      op2   <= rnd_operand(int'($urandom_range(2)));
      @(posedge clk);
      q_op.push_back(op); q_a.push_back(op1); q_b.push_back(op2);
      #1;
      if (i >= 1) begin
        check(vo, "one result per cycle, two cycles latency");
        check_result();
      end
    end
    valid <= 1'b0;
    cyc = 0;
    while (q_op.size() > 0) begin
      @(posedge clk);
      #1;
      check(vo, "drain");
      check_result();
      cyc++;
    end
    check(cyc == 1, "two cycles latency");
    @(posedge clk);
    #1 check(!vo, "idle");
    check(n_inexact > 0 && n_ubound > 0 && n_add > 0 && n_opt > 0 && n_uni > 0, "coverage");
    $display("adds %0d opts %0d unifies %0d inexact %0d ubound %0d", n_add, n_opt, n_uni,
             n_inexact, n_ubound);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
