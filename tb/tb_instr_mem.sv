// tb_instr_mem: self-checking test of the instruction memory.
//
// Fills all 1024 words with random data, reads them back in random order and
// checks each word one cycle after its read request, and that the read data
// holds while no new read is made.
module tb_instr_mem;
  logic        clk = 1'b0, req = 1'b0, we = 1'b0;
  logic [9:0]  addr = '0;
  logic [16:0] wdata = '0, rdata;
  logic [16:0] model [1024];
  int          checks = 0, failures = 0;

  instr_mem dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
                 .rdata_o(rdata));

  always #5 clk = ~clk;

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
      if (failures < 10) $display("FAIL %s: addr=%0d got=%h", what, addr, rdata);
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) begin
      model[i] = 17'($urandom);
      @(negedge clk);
      req = 1'b1; we = 1'b1; addr = 10'(i); wdata = model[i];
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      req = 1'b1; we = 1'b0; addr = 10'($urandom);
      @(negedge clk);
      check(rdata == model[addr], "read after one cycle");
      req = 1'b0;
      @(negedge clk);
      check(rdata == model[addr], "read data holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
