// tb_mem_ctrl: self-checking test of the test-bed memory controller.
//
// Small models of the instruction memory and register file sit behind the
// controller. Random instruction and register writes are followed by reads,
// whose responses must come one cycle after the command with the written
// data. Run and stop commands must produce one-cycle start/stop strobes with
// the last address and repeat flag, and while busy only CMD_STOP is ready.
module tb_mem_ctrl;
  import unum_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0, cmd_valid = 1'b0, busy = 1'b0;
  logic         cmd_ready, rsp_valid, imem_req, imem_we, rf_we, start, loop, stop;
  cmd_t         cmd = '0;
  logic [127:0] rsp_data, rf_wdata;
  logic [9:0]   imem_addr, last;
  instr_t       imem_wdata, imem_rdata;
  logic [4:0]   rf_addr;
  logic [16:0]  imem [1024];
  logic [127:0] rf [32];
  int           checks = 0, failures = 0;

  mem_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data), .imem_req_o(imem_req),
    .imem_we_o(imem_we), .imem_addr_o(imem_addr), .imem_wdata_o(imem_wdata),
    .imem_rdata_i(imem_rdata), .rf_we_o(rf_we), .rf_addr_o(rf_addr), .rf_wdata_o(rf_wdata),
    .rf_rdata_i(rf[rf_addr]), .busy_i(busy), .start_o(start), .loop_o(loop), .last_o(last),
    .stop_o(stop));

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (imem_req) begin
      if (imem_we) imem[imem_addr] <= imem_wdata;
      else         imem_rdata      <= instr_t'(imem[imem_addr]);
    end
    if (rf_we) rf[rf_addr] <= rf_wdata;
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

  task automatic send(input cmd_op_e op, input logic [9:0] a, input logic [127:0] d);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: op, addr: a, data: d};
    #1 check(cmd_ready, "ready when idle");
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  initial begin
    logic [16:0]  iw [16];
    logic [127:0] rw [8];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) begin
      iw[i] = 17'($urandom);
      send(CMD_IMEM_WR, 10'(100 + i), 128'(iw[i]));
    end
    for (int i = 0; i < 8; i++) begin
      rw[i] = {$urandom, $urandom, $urandom, $urandom};
      send(CMD_RF_WR, 10'(i * 3), rw[i]);
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      cmd_valid = 1'b1; cmd = '{op: CMD_IMEM_RD, addr: 10'(100 + i), data: '0};
      @(negedge clk);
      cmd_valid = 1'b0;
      check(rsp_valid && rsp_data == 128'(iw[i]), "instruction read back");
      @(negedge clk);
      check(!rsp_valid, "one response only");
    end
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      cmd_valid = 1'b1; cmd = '{op: CMD_RF_RD, addr: 10'(i * 3), data: '0};
      @(negedge clk);
      cmd_valid = 1'b0;
      check(rsp_valid && rsp_data == rw[i], "register read back");
    end
    // run command
    @(negedge clk);
    cmd_valid = 1'b1; cmd = '{op: CMD_RUN, addr: 10'd517, data: 128'd1};
    #1 check(start && last == 10'd517 && loop && !stop, "run strobe");
    @(negedge clk);
    cmd_valid = 1'b0;
    #1 check(!start, "start is one cycle");
    // while busy only stop is ready
    busy = 1'b1;
    cmd_valid = 1'b1; cmd = '{op: CMD_RF_WR, addr: 10'd1, data: '1};
    #1 check(!cmd_ready && !rf_we, "blocked while busy");
    cmd = '{op: CMD_STOP, addr: '0, data: '0};
    #1 check(cmd_ready && stop, "stop while busy");
    @(negedge clk);
    cmd_valid = 1'b0; busy = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
