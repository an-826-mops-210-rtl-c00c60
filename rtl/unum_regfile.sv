// unum_regfile: 128-bit register file of the test-bed.
//
// NREGS registers of 128 bits, each holding one unum or one ubound in the
// unpacked register format. Two combinational read ports and one write port
// serve the ALU; a third port (ext_*) lets the memory controller load
// operands and read results: ext_we_i writes ext_wdata_i, and ext_rdata_o
// always shows the register at ext_addr_i. Writes take effect at the clock
// edge. The ALU write port wins if both write the same register in one cycle
// (the controller never lets that happen). Reset clears every register.
// The register count is this design's choice; the paper gives none.
module unum_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned WIDTH = 128,
  parameter int unsigned AW    = $clog2(NREGS)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [AW-1:0]    raddr1_i,
  input  logic [AW-1:0]    raddr2_i,
  output logic [WIDTH-1:0] rdata1_o,
  output logic [WIDTH-1:0] rdata2_o,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             ext_we_i,
  input  logic [AW-1:0]    ext_addr_i,
  input  logic [WIDTH-1:0] ext_wdata_i,
  output logic [WIDTH-1:0] ext_rdata_o
);

  logic [WIDTH-1:0] regs [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= '0;
    end else begin
      if (ext_we_i) regs[ext_addr_i] <= ext_wdata_i;
      if (we_i)     regs[waddr_i]    <= wdata_i;
    end
  end

  assign rdata1_o    = regs[raddr1_i];
  assign rdata2_o    = regs[raddr2_i];
  assign ext_rdata_o = regs[ext_addr_i];

endmodule
