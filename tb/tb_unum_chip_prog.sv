// tb_unum_chip_prog: full-length program test of the unum ALU test chip.
//
// The chip's characterisation workload: fill the instruction memory with a
// program of 1024 directed-random instructions (add, subtract, optimize,
// unify) on random unums and ubounds of every fraction size, load all 32
// registers, run the program at full speed, read every register back, then
// run the same program a second time on the state the first run left.
//
// Two independent checks:
//   - a sequential interpreter of the program, built from one unum_alu fed
//     one instruction at a time with no pipelining, gives the register state
//     that the pipelined, stalling test-bed must reproduce bit for bit;
//   - every instruction the interpreter executes is held against real
//     arithmetic on the intervals its operands stand for: a sum or
//     difference must contain the exact interval result and be at most a
//     relative 2^-30 wider, optimize must keep the interval exactly, unify
//     must contain its operand.
// The run's cycle count must be 1024 instructions plus the stall cycles plus
// a fixed fill and drain of at most 8 cycles: one instruction per cycle.
// The chip keeps its default parameters.
module tb_unum_chip_prog;
  import unum_pkg::*;
  import tb_unum_ref::*;

  localparam int N = 1024;

  logic         clk = 1'b0, rst_n = 1'b0, cmd_valid = 1'b0;
  logic         cmd_ready, rsp_valid, busy, stall;
  cmd_t         cmd = '0;
  logic [127:0] rsp_data;
  int           checks = 0, failures = 0;
  int           n_stall = 0, n_busy = 0;

  // reference ALU of the interpreter
  logic         r_valid = 1'b0, r_valid_o;
  alu_op_e      r_op = OP_ADD;
  logic [127:0] r_a = '0, r_b = '0, r_res;

  unum_chip dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
                 .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data), .busy_o(busy),
                 .stall_o(stall));

  unum_alu ref_alu (.clk_i(clk), .rst_ni(rst_n), .valid_i(r_valid), .op_i(r_op), .op1_i(r_a),
                    .op2_i(r_b), .valid_o(r_valid_o), .res_o(r_res));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (stall) n_stall++;
    if (busy) n_busy++;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic send(input cmd_op_e op, input logic [9:0] a, input logic [127:0] d);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: op, addr: a, data: d};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic rd_reg(input int r, output logic [127:0] v);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: CMD_RF_RD, addr: 10'(r), data: '0};
    @(negedge clk);
    cmd_valid = 1'b0;
    v = rsp_data;
    check(rsp_valid, "read response");
  endtask

  function automatic real mag(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // the interval a register stands for, ignoring open and closed ends;
  // ok = 0 for NaN, infinities and values beyond 2^1000
  function automatic void ival(input ubound_t v, output real lo, output real hi, output logic ok);
    real x, u;
    lo = 0.0; hi = 0.0;
    ok = !v.left.nan && !v.left.inf && !(v.left.second && (v.right.nan || v.right.inf));
    if (!ok) return;
    if (v.left.second) begin
      lo = uval(v.left);
      hi = uval(v.right);
    end else begin
      x  = uval(v.left);
      u  = v.left.u ? uulp(v.left) : 0.0;
      lo = v.left.s ? x - u : x;
      hi = v.left.s ? x : x + u;
    end
    ok = mag(lo) < p2(1000) && mag(hi) < p2(1000);
  endfunction

  function automatic ubound_t rnd_operand();
    ubound_t v;
    unum_t   a, b, t;
    v = '0;
    a = rnd_unum(6);
    a.s = 1'($urandom);
    case ($urandom_range(2))
      0: v.left = a;
      1: begin
        a.u = 1'b1; a.zero = 1'b0;
        v.left = a;
      end
      default: begin
        b = rnd_unum(6);
        b.s = 1'($urandom);
        if (uval(a) > uval(b)) begin t = a; a = b; b = t; end
        if (uval(a) != uval(b)) begin
          a.u = 1'($urandom); b.u = 1'($urandom);
        end
        a.zero = a.zero && !a.u; b.zero = b.zero && !b.u;
        v.left = a; v.right = b; v.left.second = 1'b1;
      end
    endcase
    return v;
  endfunction

  instr_t       prog[N];
  logic [127:0] regs[32];
  int           n_real = 0;

  // run the program once on regs, one instruction at a time
  task automatic interpret();
    real  alo, ahi, blo, bhi, rlo, rhi, tlo, thi, tol;
    logic aok, bok, rok;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      r_valid = 1'b1; r_op = prog[i].op; r_a = regs[prog[i].rs1]; r_b = regs[prog[i].rs2];
      @(negedge clk);
      r_valid = 1'b0;
      @(negedge clk);
      check(r_valid_o, "reference result after two cycles");
      ival(ubound_t'(r_a), alo, ahi, aok);
      ival(ubound_t'(r_b), blo, bhi, bok);
      ival(ubound_t'(r_res), rlo, rhi, rok);
      if (aok && rok && (bok || prog[i].op inside {OP_OPT, OP_UNIFY})) begin
        n_real++;
        case (prog[i].op)
          OP_ADD, OP_SUB: begin
            tlo = (prog[i].op == OP_ADD) ? alo + blo : alo - bhi;
            thi = (prog[i].op == OP_ADD) ? ahi + bhi : ahi - blo;
            tol = (mag(tlo) + mag(thi)) * p2(-50);
            check(rlo <= tlo + tol && rhi >= thi - tol, $sformatf("instr %0d: sum holds the exact interval", i));
            tol = (mag(tlo) + mag(thi)) * p2(-30) + p2(-200);
            check(rlo >= tlo - tol && rhi <= thi + tol, $sformatf("instr %0d: sum is tight", i));
          end
          OP_OPT:
            check(rlo == alo && rhi == ahi, $sformatf("instr %0d: optimize keeps the interval", i));
          default:
            check(rlo <= alo && rhi >= ahi, $sformatf("instr %0d: unify holds the operand", i));
        endcase
      end
      regs[prog[i].rd] = r_res;
    end
  endtask

  task automatic run_and_compare(input string pass);
    logic [127:0] v;
    int           s0, b0;
    s0 = n_stall; b0 = n_busy;
    send(CMD_RUN, 10'(N - 1), 128'd0);
    @(negedge clk);
    while (busy) @(negedge clk);
    $display("%s: %0d busy cycles, %0d stall cycles", pass, n_busy - b0, n_stall - s0);
    check(n_busy - b0 - (n_stall - s0) >= N && n_busy - b0 - (n_stall - s0) <= N + 8,
          {pass, ": one instruction per cycle apart from stalls"});
    check(n_stall - s0 > 0, {pass, ": read-after-write stalls happened"});
    interpret();
    for (int r = 0; r < 32; r++) begin
      rd_reg(r, v);
      check(v == regs[r], $sformatf("%s: register %0d matches the interpreter", pass, r));
    end
  endtask

  initial begin
    int n_op[4];
    n_op = '{default: 0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int r = 0; r < 32; r++) begin
      regs[r] = rnd_operand();
      send(CMD_RF_WR, 10'(r), regs[r]);
    end
    // results go to r16..r31; a source is one of those with probability 1/4,
    // so results feed later instructions and stalls occur
    for (int i = 0; i < N; i++) begin
      prog[i].op  = alu_op_e'($urandom_range(3));
      prog[i].rd  = 5'(16 + $urandom_range(15));
      prog[i].rs1 = 5'(($urandom_range(3) == 0) ? 16 + $urandom_range(15) : $urandom_range(15));
      prog[i].rs2 = 5'(($urandom_range(3) == 0) ? 16 + $urandom_range(15) : $urandom_range(15));
      n_op[prog[i].op]++;
      send(CMD_IMEM_WR, 10'(i), 128'(prog[i]));
    end
    $display("program: %0d add, %0d sub, %0d opt, %0d unify", n_op[0], n_op[1], n_op[2], n_op[3]);

    run_and_compare("first run");
    run_and_compare("second run");
    $display("%0d instructions checked against real arithmetic", n_real);
    check(n_real > N, "most instructions checked against real arithmetic");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
