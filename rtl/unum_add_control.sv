// unum_add_control: control block of the ubound adder.
//
// Chooses, from the ubound flags b1/b2 of the two operands and add/sub, which
// endpoints feed the lower-bound (LB) and upper-bound (UB) adders. The choice
// is the operation table of the paper's adder diagram, with op1 = (a,b) and
// op2 = (c,d):
//   b2 b1   add          sub
//   0  0    a+c          a-c            (single unum result)
//   0  1    (a+c, b+c)   (a-c, b-c)
//   1  0    (a+c, a+d)   (a-d, a-c)
//   1  1    (a+c, b+d)   (a-d, b-c)
// It sets the rounding direction of each adder (truncate for a single unum,
// down for LB, up for UB) and, per bound, the open flag: the OR of the ubits
// of the two selected endpoints, as the paper prescribes.
//
// It also resolves special operands from s_x = {ubit, NaN, inf} and the signs:
// NaN in gives NaN out; +inf plus -inf gives NaN when both are closed; a
// closed infinity wins over an open one and keeps the result closed; two open
// infinities of opposite sign give -inf (LB) or +inf (UB), open. These rules
// and the encoding of the 9 special bits (per bound: special, NaN, inf, sign;
// plus "result is a ubound") are this design's; the paper gives the width 9.
//
// Timing: purely combinational.
module unum_add_control
  import unum_pkg::*;
(
  input  logic            b1_i,
  input  logic            b2_i,
  input  logic            sub_i,
  input  logic [3:0][2:0] s_i,    // [0]=a, [1]=b, [2]=c, [3]=d; {ubit, NaN, inf}
  input  logic [3:0]      sgn_i,  // signs of a, b, c, d
  output add_ctrl_t       ctrl_o,
  output special_t        special_o
);

  // Special-case resolution for one bound: x + (+-)y.
  function automatic spec_t resolve(input logic [2:0] sx_f, input logic sx,
                                    input logic [2:0] sy_f, input logic sy,
                                    input logic is_lb, output logic open_o);
    spec_t r;
    logic  ux, nx, ix, uy, ny, iy;
    {ux, nx, ix} = sx_f;
    {uy, ny, iy} = sy_f;
    r      = '0;
    open_o = ux | uy;
    if (nx || ny) begin
      r.special = 1'b1; r.nan = 1'b1;
    end else if (ix && iy) begin
      r.special = 1'b1; r.inf = 1'b1;
      if (sx == sy) begin
        r.sign = sx; open_o = ux & uy;
      end else if (!ux && !uy) begin
        r.inf = 1'b0; r.nan = 1'b1;
      end else if (!ux) begin
        r.sign = sx; open_o = 1'b0;
      end else if (!uy) begin
        r.sign = sy; open_o = 1'b0;
      end else begin
        r.sign = is_lb; open_o = 1'b1;
      end
    end else if (ix) begin
      r.special = 1'b1; r.inf = 1'b1; r.sign = sx; open_o = ux;
    end else if (iy) begin
      r.special = 1'b1; r.inf = 1'b1; r.sign = sy; open_o = uy;
    end
    return r;
  endfunction

  always_comb begin
    logic       any_ub;
    logic [1:0] ix, iy_lb, iy_ub;
    logic       lo_open, hi_open;

    any_ub          = b1_i | b2_i;
    ctrl_o          = '0;
    ctrl_o.neg      = sub_i;
    ctrl_o.lb_y_d   = sub_i & b2_i;
    ctrl_o.ub_x_b   = b1_i;
    ctrl_o.ub_y_d   = ~sub_i & b2_i;
    ctrl_o.lb_mode  = any_ub ? RND_DOWN : RND_TRUNC;
    ctrl_o.ub_mode  = RND_UP;

    // endpoint indices
    ix    = ctrl_o.ub_x_b ? 2'd1 : 2'd0;
    iy_lb = ctrl_o.lb_y_d ? 2'd3 : 2'd2;
    iy_ub = ctrl_o.ub_y_d ? 2'd3 : 2'd2;

    special_o        = '0;
    special_o.ubound = any_ub;
    special_o.lb     = resolve(s_i[0], sgn_i[0], s_i[iy_lb], sgn_i[iy_lb] ^ sub_i, 1'b1, lo_open);
    special_o.ub     = resolve(s_i[ix], sgn_i[ix], s_i[iy_ub], sgn_i[iy_ub] ^ sub_i, 1'b0, hi_open);
    ctrl_o.lb_open   = lo_open;
    ctrl_o.ub_open   = hi_open;
  end

endmodule
