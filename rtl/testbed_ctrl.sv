// testbed_ctrl: control state machine of the test-bed.
//
// Runs the program in the instruction memory, from address 0 to last_i, once
// or (loop_i) over and over until stop_i, which lets the ALU work at full
// speed with no IO in the way. Each cycle it fetches one instruction from the
// synchronous instruction memory, reads the source registers, issues the
// instruction to the ALU and, two cycles later when the ALU result comes out,
// writes it to the destination register.
//
// There is no forwarding. An instruction whose source register is the target
// of one of the (at most two) instructions still in the ALU waits (stall_o)
// and the memory re-reads the same address, until that result is written.
// OPT and UNIFY read only rs1. After the last instruction the machine waits
// for the ALU to drain and then drops busy_o.
//
// The paper names the control state machine and says what it does (1024
// instructions run once or repeatedly); the fetch pipeline, the stall and the
// stop handshake are this design's.
module testbed_ctrl
  import unum_pkg::*;
#(
  parameter int unsigned AW = 10,  // instruction address bits (1024 entries)
  parameter int unsigned RW = 5    // register number bits
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // run control
  input  logic          start_i,
  input  logic          loop_i,
  input  logic [AW-1:0] last_i,
  input  logic          stop_i,
  output logic          busy_o,
  output logic          stall_o,
  // instruction memory
  output logic          imem_req_o,
  output logic [AW-1:0] imem_addr_o,
  input  instr_t        imem_rdata_i,
  // register file
  output logic [RW-1:0] rf_raddr1_o,
  output logic [RW-1:0] rf_raddr2_o,
  output logic          rf_we_o,
  output logic [RW-1:0] rf_waddr_o,
  // ALU
  output logic          alu_valid_o,
  output alu_op_e       alu_op_o,
  input  logic          alu_valid_i
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e        state_q;
  logic [AW-1:0] pc_q, last_q;
  logic          rv_q, loop_q, stop_q;
  logic [1:0]    v_q;                  // instructions in ALU stage 1 / 2
  logic [RW-1:0] rd_q [2];

  instr_t        ir;
  logic          hazard, issue, uses_rs2;

  assign ir       = imem_rdata_i;
  assign uses_rs2 = (ir.op == OP_ADD) || (ir.op == OP_SUB);
  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < 2; i++) begin
      if (v_q[i] && (rd_q[i] == ir.rs1[RW-1:0] || (uses_rs2 && rd_q[i] == ir.rs2[RW-1:0])))
        hazard = 1'b1;
    end
  end

  assign issue       = (state_q == S_RUN) && rv_q && !hazard;
  assign stall_o     = (state_q == S_RUN) && rv_q && hazard;
  assign alu_valid_o = issue;
  assign alu_op_o    = ir.op;
  assign rf_raddr1_o = ir.rs1[RW-1:0];
  assign rf_raddr2_o = ir.rs2[RW-1:0];
  assign rf_we_o     = v_q[1];
  assign rf_waddr_o  = rd_q[1];
  assign busy_o      = (state_q != S_IDLE);

  // fetch address
  logic wrap_end;
  assign wrap_end = issue && (pc_q == last_q) && !(loop_q && !stop_q && !stop_i);

  always_comb begin
    imem_req_o  = 1'b0;
    imem_addr_o = '0;
    if (state_q == S_IDLE) begin
      imem_req_o  = start_i;
      imem_addr_o = '0;
    end else if (state_q == S_RUN) begin
      if (!rv_q) begin
        imem_req_o  = 1'b0;
      end else if (!issue) begin
        imem_req_o  = 1'b1;
        imem_addr_o = pc_q;
      end else if (!wrap_end) begin
        imem_req_o  = 1'b1;
        imem_addr_o = (pc_q == last_q) ? '0 : pc_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      pc_q    <= '0;
      last_q  <= '0;
      rv_q    <= 1'b0;
      loop_q  <= 1'b0;
      stop_q  <= 1'b0;
      v_q     <= '0;
      rd_q[0] <= '0;
      rd_q[1] <= '0;
    end else begin
      v_q     <= {v_q[0], issue};
      rd_q[1] <= rd_q[0];
      if (issue) rd_q[0] <= ir.rd[RW-1:0];
      case (state_q)
        S_IDLE: begin
          if (start_i) begin
            state_q <= S_RUN;
            pc_q    <= '0;
            rv_q    <= 1'b1;
            loop_q  <= loop_i;
            last_q  <= last_i;
            stop_q  <= 1'b0;
          end
        end
        S_RUN: begin
          if (stop_i) stop_q <= 1'b1;
          if (issue) begin
            if (wrap_end) begin
              state_q <= S_DRAIN;
              rv_q    <= 1'b0;
            end else begin
              pc_q <= (pc_q == last_q) ? '0 : pc_q + 1'b1;
            end
          end
        end
        default: begin  // S_DRAIN
          if (v_q == '0) state_q <= S_IDLE;
        end
      endcase
    end
  end

  // every register write must meet an ALU result
  a_wb_aligned : assert property (@(posedge clk_i) disable iff (!rst_ni) rf_we_o |-> alu_valid_i);
  // nothing issues while its source is in flight
  a_no_hazard_issue : assert property (@(posedge clk_i) disable iff (!rst_ni) issue |-> !hazard);

endmodule
