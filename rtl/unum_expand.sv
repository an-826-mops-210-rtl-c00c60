// unum_expand: brings a 128-bit register operand to full precision.
//
// Every bound of the operand is re-encoded at es=16, fs=32: the exponent is
// rebiased to 32767, the fraction is left-aligned to 32 bits and subnormals of
// narrower environments are normalised. No information is lost, so the adder
// behind it only ever sees one number format (the paper expands operands to 16
// exponent and 32 fraction bits before adding; how is this design's choice).
//
// An inexact single unum (ubit set, 2nd clear) stands for the open interval
// beyond x by one ulp of its own fraction size. Widening the fraction would
// shrink that ulp, so such a unum is turned into a ubound with the two open
// endpoints x and x+ulp (ordered by value for negative numbers); is_ubound_o
// then reports a ubound. An x+ulp beyond the largest finite value becomes an
// open infinite endpoint.
//
// NaN, infinity and zero are recognised from the summary bits and replaced by
// their canonical expanded patterns.
//
// Interface: op_i register-format operand, op_o expanded operand,
// is_ubound_o operand is a ubound after expansion (b_x of the adder).
// Timing: purely combinational.
module unum_expand
  import unum_pkg::*;
(
  input  ubound_t op_i,
  output ubound_t op_o,
  output logic    is_ubound_o
);

  always_comb begin
    unum_t      l, lo, hi;
    xval_t      xv, xn;
    logic [5:0] ush;
    logic       ovf;

    op_o        = '0;
    is_ubound_o = 1'b0;
    lo          = '0;
    hi          = '0;
    xv          = '0;
    xn          = '0;
    ush         = '0;
    ovf         = 1'b0;
    l           = op_i.left;

    if (l.second) begin
      // ubound: both endpoints are values, the ubits are open flags
      lo = expand_slot(op_i.left);
      hi = expand_slot(op_i.right);
      lo.second   = 1'b1;
      hi.second   = 1'b0;
      op_o.left   = lo;
      op_o.right  = hi;
      is_ubound_o = 1'b1;
    end else if (l.u && !l.nan && !l.inf) begin
      // inexact single unum: (x, x+ulp) in magnitude, both ends open
      xv = expand_val(l, ush);
      xn = add_ulp(xv, ush, ovf);
      if (xv.e == '0 && xv.f == '0 && l.esm1 != 4'd15) begin
        // (0, ulp) of a narrower environment: ulp = 2^(1-bias-fs), normal here
        xn.e = 16'(32767 + 1 - ((1 << l.esm1) - 1) - (int'(l.fsm1) + 1));
        xn.f = '0;
      end
      lo = mk_x(xv, 1'b1);
      hi = ovf ? mk_inf(l.s, 1'b1) : mk_x(xn, 1'b1);
      if (l.s) begin
        op_o.left  = hi;
        op_o.right = lo;
      end else begin
        op_o.left  = lo;
        op_o.right = hi;
      end
      op_o.left.second  = 1'b1;
      op_o.right.second = 1'b0;
      is_ubound_o       = 1'b1;
    end else begin
      op_o.left        = expand_slot(l);
      op_o.left.second = 1'b0;
    end
  end

endmodule
