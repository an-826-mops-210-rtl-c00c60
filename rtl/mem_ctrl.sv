// mem_ctrl: memory controller of the test-bed.
//
// Serves the commands that reach the chip from outside: write or read an
// instruction word, write or read a register, start a run of the program
// (once, or repeated while data[0] is set; addr gives the last instruction)
// and stop a repeated run. This is how operands and programs are loaded and
// how results are read back for checking.
//
// Handshake: a command is taken in a cycle with cmd_valid_i and cmd_ready_o
// both high. While a program runs only CMD_STOP is ready, since the run owns
// the instruction memory and the register file. A read returns its data one
// cycle after it is taken, with rsp_valid_o high for that one cycle (the
// instruction word zero-extended to 128 bits).
//
// The paper says that both memories are reached through commands to a memory
// controller; the command set, its encoding and the handshake are this
// design's.
module mem_ctrl
  import unum_pkg::*;
#(
  parameter int unsigned AW = 10,
  parameter int unsigned RW = 5
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // command port
  input  logic          cmd_valid_i,
  output logic          cmd_ready_o,
  input  cmd_t          cmd_i,
  output logic          rsp_valid_o,
  output logic [127:0]  rsp_data_o,
  // instruction memory (used while no program runs)
  output logic          imem_req_o,
  output logic          imem_we_o,
  output logic [AW-1:0] imem_addr_o,
  output instr_t        imem_wdata_o,
  input  instr_t        imem_rdata_i,
  // register file port
  output logic          rf_we_o,
  output logic [RW-1:0] rf_addr_o,
  output logic [127:0]  rf_wdata_o,
  input  logic [127:0]  rf_rdata_i,
  // run control
  input  logic          busy_i,
  output logic          start_o,
  output logic          loop_o,
  output logic [AW-1:0] last_o,
  output logic          stop_o
);

  logic    take;
  logic    pend_imem_q, pend_rf_q;
  logic [127:0] rf_q;

  assign cmd_ready_o  = !busy_i || (cmd_i.op == CMD_STOP);
  assign take         = cmd_valid_i && cmd_ready_o;

  assign imem_req_o   = take && (cmd_i.op == CMD_IMEM_WR || cmd_i.op == CMD_IMEM_RD);
  assign imem_we_o    = (cmd_i.op == CMD_IMEM_WR);
  assign imem_addr_o  = cmd_i.addr[AW-1:0];
  assign imem_wdata_o = instr_t'(cmd_i.data[$bits(instr_t)-1:0]);

  assign rf_we_o      = take && (cmd_i.op == CMD_RF_WR);
  assign rf_addr_o    = cmd_i.addr[RW-1:0];
  assign rf_wdata_o   = cmd_i.data;

  assign start_o      = take && (cmd_i.op == CMD_RUN);
  assign loop_o       = cmd_i.data[0];
  assign last_o       = cmd_i.addr[AW-1:0];
  assign stop_o       = take && (cmd_i.op == CMD_STOP);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_imem_q <= 1'b0;
      pend_rf_q   <= 1'b0;
      rf_q        <= '0;
    end else begin
      pend_imem_q <= take && (cmd_i.op == CMD_IMEM_RD);
      pend_rf_q   <= take && (cmd_i.op == CMD_RF_RD);
      if (take && cmd_i.op == CMD_RF_RD) rf_q <= rf_rdata_i;
    end
  end

  assign rsp_valid_o = pend_imem_q || pend_rf_q;
  assign rsp_data_o  = pend_imem_q ? 128'(imem_rdata_i) : rf_q;

  // a command, once offered, stays until it is taken
  a_cmd_stable : assert property (@(posedge clk_i) disable iff (!rst_ni)
    (cmd_valid_i && !cmd_ready_o) |=> (cmd_valid_i && $stable(cmd_i)));

endmodule
