// instr_mem: instruction memory of the test-bed.
//
// Holds up to 1024 instructions, the program size the test chip executes.
// Single port, synchronous: with req_i high the word at addr_i is written
// (we_i high) or read, and a read word is on rdata_o from the next cycle on
// until the next read. Written as a plain array, which synthesis maps to an
// SRAM macro; the instruction width is this design's (2-bit opcode and three
// 5-bit register numbers).
module instr_mem #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 17,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end

endmodule
