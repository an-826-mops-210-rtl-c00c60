// unum_chip: the unum ALU test chip.
//
// Wraps the 128-bit unum ALU in a small test-bed, as built for measuring it in
// silicon: a 1024-word instruction memory, a register file of unpacked
// 128-bit unums/ubounds, a control state machine that streams the program
// through the ALU (once or repeatedly) and a memory controller through which
// an outside tester loads programs and operands and reads results. After a
// load the ALU runs at one operation per cycle without waiting on IO.
//
// Interface: a command port (cmd_valid_i/cmd_ready_o/cmd_i, see unum_pkg::cmd_t
// and mem_ctrl), a read response port (rsp_valid_o/rsp_data_o) and status:
// busy_o while a program runs, stall_o in a cycle where an instruction waits
// for its source operand. The instruction memory belongs to the memory
// controller while idle and to the control state machine while running.
// The partition into these blocks follows the paper; the interfaces are this
// design's.
module unum_chip
  import unum_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned NREGS      = 32
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         cmd_valid_i,
  output logic         cmd_ready_o,
  input  cmd_t         cmd_i,
  output logic         rsp_valid_o,
  output logic [127:0] rsp_data_o,
  output logic         busy_o,
  output logic         stall_o
);

  localparam int unsigned AW = $clog2(IMEM_DEPTH);
  localparam int unsigned RW = $clog2(NREGS);

  // memory controller side
  logic          mc_imem_req, mc_imem_we, mc_rf_we, start, loop, stop;
  logic [AW-1:0] mc_imem_addr, last;
  instr_t        mc_imem_wdata, imem_rdata;
  logic [RW-1:0] mc_rf_addr;
  logic [127:0]  mc_rf_wdata, mc_rf_rdata;

  // control side
  logic          ct_imem_req, rf_we, alu_valid, res_valid;
  logic [AW-1:0] ct_imem_addr;
  logic [RW-1:0] raddr1, raddr2, waddr;
  alu_op_e       alu_op;
  logic [127:0]  rdata1, rdata2, res;

  mem_ctrl #(.AW(AW), .RW(RW)) u_mem_ctrl (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .cmd_valid_i (cmd_valid_i),
    .cmd_ready_o (cmd_ready_o),
    .cmd_i       (cmd_i),
    .rsp_valid_o (rsp_valid_o),
    .rsp_data_o  (rsp_data_o),
    .imem_req_o  (mc_imem_req),
    .imem_we_o   (mc_imem_we),
    .imem_addr_o (mc_imem_addr),
    .imem_wdata_o(mc_imem_wdata),
    .imem_rdata_i(imem_rdata),
    .rf_we_o     (mc_rf_we),
    .rf_addr_o   (mc_rf_addr),
    .rf_wdata_o  (mc_rf_wdata),
    .rf_rdata_i  (mc_rf_rdata),
    .busy_i      (busy_o),
    .start_o     (start),
    .loop_o      (loop),
    .last_o      (last),
    .stop_o      (stop)
  );

  // the control state machine owns the instruction memory while it runs and
  // in the cycle it starts (its first fetch)
  logic ctrl_owns_imem;
  assign ctrl_owns_imem = busy_o || ct_imem_req;

  instr_mem #(.DEPTH(IMEM_DEPTH), .WIDTH($bits(instr_t))) u_imem (
    .clk_i  (clk_i),
    .req_i  (ctrl_owns_imem ? ct_imem_req : mc_imem_req),
    .we_i   (ctrl_owns_imem ? 1'b0 : mc_imem_we),
    .addr_i (ctrl_owns_imem ? ct_imem_addr : mc_imem_addr),
    .wdata_i(mc_imem_wdata),
    .rdata_o(imem_rdata)
  );

  testbed_ctrl #(.AW(AW), .RW(RW)) u_ctrl (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .start_i     (start),
    .loop_i      (loop),
    .last_i      (last),
    .stop_i      (stop),
    .busy_o      (busy_o),
    .stall_o     (stall_o),
    .imem_req_o  (ct_imem_req),
    .imem_addr_o (ct_imem_addr),
    .imem_rdata_i(imem_rdata),
    .rf_raddr1_o (raddr1),
    .rf_raddr2_o (raddr2),
    .rf_we_o     (rf_we),
    .rf_waddr_o  (waddr),
    .alu_valid_o (alu_valid),
    .alu_op_o    (alu_op),
    .alu_valid_i (res_valid)
  );

  unum_regfile #(.NREGS(NREGS), .WIDTH(128)) u_rf (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .raddr1_i   (raddr1),
    .raddr2_i   (raddr2),
    .rdata1_o   (rdata1),
    .rdata2_o   (rdata2),
    .we_i       (rf_we),
    .waddr_i    (waddr),
    .wdata_i    (res),
    .ext_we_i   (mc_rf_we),
    .ext_addr_i (mc_rf_addr),
    .ext_wdata_i(mc_rf_wdata),
    .ext_rdata_o(mc_rf_rdata)
  );

  unum_alu u_alu (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .valid_i(alu_valid),
    .op_i   (alu_op),
    .op1_i  (rdata1),
    .op2_i  (rdata2),
    .valid_o(res_valid),
    .res_o  (res)
  );

endmodule
