// unum_ubound_adder: adds or subtracts two expanded unums or ubounds.
//
// Operand 1 is (a,b) and operand 2 is (c,d), both already expanded to es=16,
// fs=32 (a and c in the lower half, b and d in the upper half when the
// operand is a ubound). Two bound adders work side by side: the lower-bound
// adder always takes a as first operand and c or d as second, the upper-bound
// adder takes a or b and c or d; the control picks them from b1, b2 and
// add/sub, following the paper's table. Doing both bounds at once is what
// gives the ALU two additions per cycle. The pack unit writes the result,
// still at es=16, fs=32; compression is left to the optimize unit behind.
//
// Timing: one register stage after the two bound adders (before pack), so a
// result appears one cycle after valid_i, one operation per cycle. The paper
// lets the synthesis tool retime this stage; its position here is this
// design's.
module unum_ubound_adder
  import unum_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    valid_i,
  input  ubound_t op1_i,
  input  ubound_t op2_i,
  input  logic    b1_i,
  input  logic    b2_i,
  input  logic    sub_i,
  output logic    valid_o,
  output ubound_t res_o
);

  unum_t           ea, eb, ec, ed;
  logic [3:0][2:0] s;
  logic [3:0]      sgn;
  add_ctrl_t       ctrl;
  special_t        special;
  xval_t           lb_x, lb_y, ub_x, ub_y, lb_r, ub_r;
  logic [2:0]      lb_fl, ub_fl;

  assign ea = op1_i.left;
  assign eb = op1_i.right;
  assign ec = op2_i.left;
  assign ed = op2_i.right;

  assign s   = {{ed.u, ed.nan, ed.inf}, {ec.u, ec.nan, ec.inf},
                {eb.u, eb.nan, eb.inf}, {ea.u, ea.nan, ea.inf}};
  assign sgn = {ed.s, ec.s, eb.s, ea.s};

  unum_add_control u_ctrl (
    .b1_i     (b1_i),
    .b2_i     (b2_i),
    .sub_i    (sub_i),
    .s_i      (s),
    .sgn_i    (sgn),
    .ctrl_o   (ctrl),
    .special_o(special)
  );

  // operand multiplexers
  assign lb_x = xval_of(ea);
  assign lb_y = ctrl.lb_y_d ? xval_of(ed) : xval_of(ec);
  assign ub_x = ctrl.ub_x_b ? xval_of(eb) : xval_of(ea);
  assign ub_y = ctrl.ub_y_d ? xval_of(ed) : xval_of(ec);

  unum_fp_add u_lb_add (
    .x_i      (lb_x),
    .y_i      (lb_y),
    .neg_y_i  (ctrl.neg),
    .mode_i   (ctrl.lb_mode),
    .res_o    (lb_r),
    .ovf_o    (lb_fl[2]),
    .inexact_o(lb_fl[1]),
    .sign_o   (lb_fl[0])
  );

  unum_fp_add u_ub_add (
    .x_i      (ub_x),
    .y_i      (ub_y),
    .neg_y_i  (ctrl.neg),
    .mode_i   (ctrl.ub_mode),
    .res_o    (ub_r),
    .ovf_o    (ub_fl[2]),
    .inexact_o(ub_fl[1]),
    .sign_o   (ub_fl[0])
  );

  // pipeline register between the adders and pack
  xval_t      lb_q, ub_q;
  logic [2:0] lb_fl_q, ub_fl_q;
  logic [1:0] open_q;
  special_t   special_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o   <= 1'b0;
      lb_q      <= '0;
      ub_q      <= '0;
      lb_fl_q   <= '0;
      ub_fl_q   <= '0;
      open_q    <= '0;
      special_q <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        lb_q      <= lb_r;
        ub_q      <= ub_r;
        lb_fl_q   <= lb_fl;
        ub_fl_q   <= ub_fl;
        open_q    <= {ctrl.ub_open, ctrl.lb_open};
        special_q <= special;
      end
    end
  end

  unum_pack u_pack (
    .lb_i      (lb_q),
    .ub_i      (ub_q),
    .lb_flags_i(lb_fl_q),
    .ub_flags_i(ub_fl_q),
    .open_i    (open_q),
    .special_i (special_q),
    .res_o     (res_o)
  );

endmodule
