// tb_unum_regfile: self-checking test of the register file.
//
// Checks that reset clears every register, then performs random writes on the
// ALU port and the external port and compares both read ports and the
// external read port with a model every cycle.
module tb_unum_regfile;
  logic         clk = 1'b0, rst_n = 1'b0, we = 1'b0, ext_we = 1'b0;
  logic [4:0]   ra1 = '0, ra2 = '0, wa = '0, ea = '0;
  logic [127:0] rd1, rd2, wd = '0, ewd = '0, erd;
  logic [127:0] model [32];
  int           checks = 0, failures = 0;

  unum_regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr1_i(ra1), .raddr2_i(ra2),
                    .rdata1_o(rd1), .rdata2_o(rd2), .we_i(we), .waddr_i(wa), .wdata_i(wd),
                    .ext_we_i(ext_we), .ext_addr_i(ea), .ext_wdata_i(ewd), .ext_rdata_o(erd));

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
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #12 rst_n = 1'b1;
    for (int i = 0; i < 32; i++) begin
      model[i] = '0;
      ra1 = 5'(i); ea = 5'(i);
      #1 check(rd1 == '0 && erd == '0, "reset clears");
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 5'($urandom); wd = {$urandom, $urandom, $urandom, $urandom};
      ext_we = 1'($urandom); ea = 5'($urandom); ewd = {$urandom, $urandom, $urandom, $urandom};
      if (we && ext_we && wa == ea) ext_we = 1'b0;
      ra1 = 5'($urandom); ra2 = 5'($urandom);
      #1;
      check(rd1 == model[ra1] && rd2 == model[ra2] && erd == model[ea], "reads");
      @(posedge clk);
      if (ext_we) model[ea] = ewd;
      if (we) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
