// tb_testbed_ctrl: self-checking test of the test-bed control state machine.
//
// A model of the synchronous instruction memory and of the two-cycle ALU sit
// around the controller. Three programs are run:
//   1. independent instructions: one issue per cycle, in program order, each
//      written back two cycles later to its destination register;
//   2. a dependent chain: every instruction waits two cycles for its source,
//      so the stall count is known; an OPT whose unused rs2 matches an
//      in-flight register must not stall;
//   3. repeated mode: the program wraps around until a stop command, then
//      finishes its current pass and busy drops.
module tb_testbed_ctrl;
  import unum_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, start = 1'b0, loop = 1'b0, stop = 1'b0;
  logic [9:0] last = '0;
  logic       busy, stall, imem_req, rf_we, alu_valid;
  logic [9:0] imem_addr;
  instr_t     imem_rdata;
  logic [4:0] ra1, ra2, wa;
  alu_op_e    alu_op;
  logic [1:0] alu_pipe;
  instr_t     prog [1024];
  int         checks = 0, failures = 0;
  int         issues = 0, stalls = 0, writes = 0;
  instr_t     issued [$];
  logic [4:0] wb_rd [$];

  testbed_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .loop_i(loop), .last_i(last),
    .stop_i(stop), .busy_o(busy), .stall_o(stall), .imem_req_o(imem_req),
    .imem_addr_o(imem_addr), .imem_rdata_i(imem_rdata), .rf_raddr1_o(ra1),
    .rf_raddr2_o(ra2), .rf_we_o(rf_we), .rf_waddr_o(wa), .alu_valid_o(alu_valid),
    .alu_op_o(alu_op), .alu_valid_i(alu_pipe[1]));

  always #5 clk = ~clk;

  // instruction memory and ALU models
  always_ff @(posedge clk) begin
    if (imem_req) imem_rdata <= prog[imem_addr];
    alu_pipe <= {alu_pipe[0], alu_valid};
  end

  initial begin
    #1000000;
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

  // monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (alu_valid) begin
        issues++;
        issued.push_back('{op: alu_op, rd: 5'd0, rs1: ra1, rs2: ra2});
      end
      if (stall) stalls++;
      if (rf_we) begin
        writes++;
        wb_rd.push_back(wa);
      end
    end
  end

  task automatic run(input int n, input logic lp);
    @(negedge clk);
    start = 1'b1; last = 10'(n - 1); loop = lp;
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    int t0, t1, cnt;
    alu_pipe = '0;
    imem_rdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. independent instructions
    for (int i = 0; i < 64; i++)
      prog[i] = '{op: OP_ADD, rd: 5'(i % 8), rs1: 5'(8 + i % 8), rs2: 5'(16 + i % 8)};
    issues = 0; stalls = 0; writes = 0; issued.delete(); wb_rd.delete();
    run(64, 1'b0);
    t0 = $time;
    while (busy) @(negedge clk);
    t1 = $time;
    check(issues == 64 && stalls == 0 && writes == 64, "64 issues, no stall, 64 writes");
    check((t1 - t0) / 10 <= 64 + 4, "one instruction per cycle");
    for (int i = 0; i < 64; i++) begin
      instr_t x;
      x = issued.pop_front();
      check(x.rs1 == 5'(8 + i % 8) && x.rs2 == 5'(16 + i % 8), "program order");
      check(wb_rd.pop_front() == 5'(i % 8), "write-back register");
    end

    // 2. dependent chain r1 = r1 + r2, and an OPT with a harmless rs2
    for (int i = 0; i < 10; i++) prog[i] = '{op: OP_ADD, rd: 5'd1, rs1: 5'd1, rs2: 5'd2};
    prog[10] = '{op: OP_OPT, rd: 5'd3, rs1: 5'd4, rs2: 5'd1};
    issues = 0; stalls = 0; writes = 0;
    run(11, 1'b0);
    while (busy) @(negedge clk);
    check(issues == 11 && writes == 11, "chain completes");
    check(stalls == 2 * 9, "two stall cycles per dependent instruction");

    // 3. repeated mode with stop
    for (int i = 0; i < 4; i++)
      prog[i] = '{op: OP_SUB, rd: 5'(i), rs1: 5'(10 + i), rs2: 5'(20 + i)};
    issues = 0; stalls = 0; writes = 0;
    run(4, 1'b1);
    repeat (37) @(negedge clk);
    check(busy, "still running in repeated mode");
    stop = 1'b1;
    @(negedge clk);
    stop = 1'b0;
    cnt = 0;
    while (busy && cnt < 100) begin @(negedge clk); cnt++; end
    check(!busy, "stops after stop command");
    check(issues > 30 && issues % 4 == 0, "whole passes only");
    check(writes == issues, "all results written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
