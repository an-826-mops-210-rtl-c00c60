// tb_unum_chip: end-to-end test of the unum ALU test chip at full size.
//
// Drives the chip only through its command port, the way a tester would:
// loads operands into registers and a program into instruction memory, runs
// it once, reads all results back and checks them against real-arithmetic
// references; then runs a one-instruction accumulation in repeated mode,
// stops it, and checks that the accumulated value is a whole number of
// passes. Every mechanism of the design is made to happen and counted:
// read-after-write stalls, exact and inexact (ubit) sums, ubound results,
// compression by optimize, overflow to (maxreal, inf), infinity operands,
// unify merging a ubound, explicit optimize and repeated-mode wrap-around.
// The chip keeps its default parameters (1024 instructions, 32 registers).
module tb_unum_chip;
  import unum_pkg::*;
  import tb_unum_ref::*;

  logic         clk = 1'b0, rst_n = 1'b0, cmd_valid = 1'b0;
  logic         cmd_ready, rsp_valid, busy, stall;
  cmd_t         cmd = '0;
  logic [127:0] rsp_data;
  int           checks = 0, failures = 0;
  int           n_stall = 0;

  unum_chip dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
                 .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data), .busy_o(busy),
                 .stall_o(stall));

  always #5 clk = ~clk;
  always @(posedge clk) if (stall) n_stall++;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: %h", what, rsp_data);
    end
  endtask

  task automatic send(input cmd_op_e op, input logic [9:0] a, input logic [127:0] d);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: op, addr: a, data: d};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic rd_reg(input int r, output ubound_t v);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: CMD_RF_RD, addr: 10'(r), data: '0};
    @(negedge clk);
    cmd_valid = 1'b0;
    v = ubound_t'(rsp_data);
    check(rsp_valid, "read response");
  endtask

  function automatic logic [127:0] single(input unum_t u);
    return {64'd0, u};
  endfunction

  function automatic logic [16:0] ins(input alu_op_e op, input int rd, input int a, input int b);
    instr_t i;
    i = '{op: op, rd: 5'(rd), rs1: 5'(a), rs2: 5'(b)};
    return i;
  endfunction

  initial begin
    ubound_t v;
    ubound_t ub;
    unum_t   maxr, inf;
    int      k;
    logic    m_exact = 0, m_inexact = 0, m_ubound = 0, m_compress = 0, m_overflow = 0;
    logic    m_inf = 0, m_unify = 0, m_opt = 0, m_loop = 0, m_stall = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // operands
    send(CMD_RF_WR, 0, single(mk(1'b0, 2, 2, 1, 2, 1'b0)));            // 1.5
    send(CMD_RF_WR, 1, single(mk(1'b0, 3, 3, 4, 1, 1'b0)));            // 2.25
    ub = {mk(1'b0, 2, 1, 2, 0, 1'b0), mk(1'b0, 2, 1, 1, 0, 1'b0)};      // [1, 2]
    ub.left.second = 1'b1;
    send(CMD_RF_WR, 2, ub);
    send(CMD_RF_WR, 3, single(mk(1'b0, 8, 32, 127, 1, 1'b0)));         // 1 + 2^-32
    send(CMD_RF_WR, 4, single(mk(1'b0, 8, 1, 127 + 20, 0, 1'b0)));     // 2^20
    maxr = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFE, 1'b0);
    send(CMD_RF_WR, 5, single(maxr));
    send(CMD_RF_WR, 6, single(mk(1'b0, 2, 2, 2, 2, 1'b1)));            // (3, 3.5)
    inf = mk(1'b0, 16, 32, 64'hFFFF, 64'hFFFF_FFFF, 1'b0); inf.inf = 1'b1;
    send(CMD_RF_WR, 7, single(inf));

    // program
    send(CMD_IMEM_WR, 0, ins(OP_ADD,   10, 0, 1));   // 3.75
    send(CMD_IMEM_WR, 1, ins(OP_ADD,   11, 10, 0));  // 5.25, waits for r10
    send(CMD_IMEM_WR, 2, ins(OP_SUB,   12, 2, 0));   // [-0.5, 0.5]
    send(CMD_IMEM_WR, 3, ins(OP_ADD,   13, 3, 4));   // inexact
    send(CMD_IMEM_WR, 4, ins(OP_ADD,   14, 5, 5));   // overflow
    send(CMD_IMEM_WR, 5, ins(OP_ADD,   15, 6, 1));   // (5.25, 5.75)
    send(CMD_IMEM_WR, 6, ins(OP_UNIFY, 16, 15, 0));  // (5, 6), waits for r15
    send(CMD_IMEM_WR, 7, ins(OP_OPT,   17, 3, 0));
    send(CMD_IMEM_WR, 8, ins(OP_ADD,   18, 7, 0));   // +inf
    send(CMD_IMEM_WR, 9, ins(OP_SUB,   19, 11, 11)); // 0
    send(CMD_RUN, 9, 128'd0);
    @(negedge clk);
    while (busy) @(negedge clk);

    rd_reg(10, v);
    check(!v.left.second && !v.left.u && uval(v.left) == 3.75, "1.5 + 2.25 = 3.75");
    check(v.left.esm1 < 4'd15 && int'(v.left.esm1) + int'(v.left.fsm1) + 2 == min_cost(3.75),
          "sum is compressed");
    m_exact = !v.left.u; m_compress = v.left.esm1 < 4'd15;
    rd_reg(11, v);
    check(uval(v.left) == 5.25 && !v.left.u, "dependent sum");
    rd_reg(12, v);
    check(v.left.second && uval(v.left) == -0.5 && uval(v.right) == 0.5 &&
          !v.left.u && !v.right.u, "[1,2] - 1.5");
    m_ubound = v.left.second;
    rd_reg(13, v);
    check(!v.left.second && v.left.u && uval(v.left) == p2(20) + 1.0 &&
          uulp(v.left) == p2(20 - 32), "inexact sum sets the ubit");
    m_inexact = v.left.u;
    rd_reg(14, v);
    check(!v.left.second && v.left.u && v.left.e == 16'hFFFF && v.left.f == 32'hFFFF_FFFE &&
          !v.left.inf, "overflow gives (maxreal, inf)");
    m_overflow = v.left.u && v.left.e == 16'hFFFF;
    rd_reg(15, v);
    check(v.left.second && uval(v.left) == 5.25 && uval(v.right) == 5.75 &&
          v.left.u && v.right.u, "(3,3.5) + 2.25");
    rd_reg(16, v);
    check(!v.left.second && v.left.u && uval(v.left) == 5.0 && uulp(v.left) == 1.0,
          "unify to (5, 6)");
    m_unify = !v.left.second && v.left.u;
    rd_reg(17, v);
    check(uval(v.left) == 1.0 + p2(-32) && v.left.fsm1 == 5'd31 &&
          int'(v.left.esm1) + 1 == 2, "optimize");
    m_opt = (v.left.esm1 == 4'd1);
    rd_reg(18, v);
    check(v.left.inf && !v.left.s && !v.left.u, "inf + 1.5");
    m_inf = v.left.inf;
    rd_reg(19, v);
    check(v.left.zero && uval(v.left) == 0.0, "x - x = 0");
    m_stall = (n_stall > 0);
    check(n_stall == 2 + 2, "stall cycles");

    // repeated mode: r20 = r20 + 1.5 until stopped
    send(CMD_RF_WR, 20, '0);
    send(CMD_IMEM_WR, 0, ins(OP_ADD, 20, 20, 0));
    send(CMD_RUN, 0, 128'd1);
    repeat (40) @(negedge clk);
    check(busy, "running repeatedly");
    send(CMD_STOP, 0, '0);
    while (busy) @(negedge clk);
    rd_reg(20, v);
    k = int'(uval(v.left) / 1.5);
    check(real'(k) * 1.5 == uval(v.left) && k >= 10, "accumulated whole passes");
    m_loop = (k >= 2);

    check(m_exact,    "mechanism: exact sum");
    check(m_inexact,  "mechanism: inexact sum");
    check(m_ubound,   "mechanism: ubound result");
    check(m_compress, "mechanism: compression after add");
    check(m_overflow, "mechanism: overflow");
    check(m_inf,      "mechanism: infinity");
    check(m_unify,    "mechanism: unify");
    check(m_opt,      "mechanism: optimize");
    check(m_loop,     "mechanism: repeated run");
    check(m_stall,    "mechanism: stall");
    $display("passes %0d stalls %0d", k, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
