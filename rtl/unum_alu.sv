// unum_alu: the 128-bit unum {4,5} ALU.
//
// Four operations on operands in register format (see unum_pkg):
//   OP_ADD, OP_SUB  op1 +/- op2 on unums or ubounds in any mix, result
//                   optimised (lossless compression after every addition)
//   OP_OPT          optimise op1 (lossless)
//   OP_UNIFY        merge the ubound op1 into one unum where possible (lossy)
// Data path, as in the paper's ALU diagram: Expand 1 and Expand 2 feed the
// ubound adder; a multiplexer picks the adder result or the expanded op1 for
// the optimize unit; the unify unit works on op1 as it arrives; a last
// multiplexer picks optimize or unify.
//
// Timing: two pipeline stages, one operation accepted every cycle; the
// result of an operation issued with valid_i in cycle t appears with valid_o
// in cycle t+2. The first register sits inside the ubound adder, behind the
// bound adders, the second at the ALU output. The paper reports two pipeline
// stages whose cut lines the synthesis tool retimed; where they sit here is
// this design's choice. The opcode encoding is this design's as well.
module unum_alu
  import unum_pkg::*;
#(
  parameter int unsigned WIDTH = 128
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  input  alu_op_e          op_i,
  input  logic [WIDTH-1:0] op1_i,
  input  logic [WIDTH-1:0] op2_i,
  output logic             valid_o,
  output logic [WIDTH-1:0] res_o
);

  if (WIDTH != $bits(ubound_t)) begin : g_width_check
    $error("unum_alu: WIDTH must be %0d", $bits(ubound_t));
  end

  ubound_t x1, x2, add_res, opt_in, opt_res, uni_res;
  logic    b1, b2, add_valid, unified;

  unum_expand u_expand1 (.op_i(ubound_t'(op1_i)), .op_o(x1), .is_ubound_o(b1));
  unum_expand u_expand2 (.op_i(ubound_t'(op2_i)), .op_o(x2), .is_ubound_o(b2));

  unum_ubound_adder u_adder (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .valid_i(valid_i && (op_i == OP_ADD || op_i == OP_SUB)),
    .op1_i  (x1),
    .op2_i  (x2),
    .b1_i   (b1),
    .b2_i   (b2),
    .sub_i  (op_i == OP_SUB),
    .valid_o(add_valid),
    .res_o  (add_res)
  );

  // stage 1 registers beside the adder
  alu_op_e op_q;
  logic    valid_q;
  ubound_t x1_q, raw1_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      op_q    <= OP_ADD;
      x1_q    <= '0;
      raw1_q  <= '0;
    end else begin
      valid_q <= valid_i;
      if (valid_i) begin
        op_q   <= op_i;
        x1_q   <= x1;
        raw1_q <= ubound_t'(op1_i);
      end
    end
  end

  assign opt_in = (op_q == OP_OPT) ? x1_q : add_res;

  unum_optimize u_optimize (.op_i(opt_in), .res_o(opt_res));
  unum_unify    u_unify    (.op_i(raw1_q), .res_o(uni_res), .unified_o(unified));

  // stage 2: output register
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      res_o   <= '0;
    end else begin
      valid_o <= valid_q;
      if (valid_q) res_o <= (op_q == OP_UNIFY) ? uni_res : opt_res;
    end
  end

  // the adder result must arrive together with its own stage-1 entry
  a_add_aligned : assert property (@(posedge clk_i) disable iff (!rst_ni)
    add_valid |-> (valid_q && (op_q == OP_ADD || op_q == OP_SUB)));

endmodule
