// unum_pack: assembles the ubound adder result in register format.
//
// Takes the two 49-bit bound results with their ovflw, ubit and int. sign
// flags, the per-bound open flags and the 9 special bits, and writes a
// 128-bit word at es=16, fs=32 with all summary bits set. A single-unum
// result goes to the lower half with 2nd=0; a ubound puts the lower bound in
// the lower half (2nd=1) and the upper bound in the upper half.
//
// Per bound: a special result becomes the canonical NaN or infinity; an
// overflow becomes an open infinity when the bound was rounded away from zero
// (lower bound below -maxreal, upper bound above +maxreal) and an open
// +-maxreal otherwise, which for a single unum is the unum (maxreal, inf).
// Otherwise the value is stored with ubit = open flag OR inexact. The widths
// follow the paper's adder diagram; the handling is this design's.
//
// Timing: purely combinational.
module unum_pack
  import unum_pkg::*;
(
  input  xval_t    lb_i,
  input  xval_t    ub_i,
  input  logic [2:0] lb_flags_i,  // {ovflw, ubit, int. sign}
  input  logic [2:0] ub_flags_i,
  input  logic [1:0] open_i,      // {ub, lb}
  input  special_t special_i,
  output ubound_t  res_o
);

  function automatic unum_t pack_bound(input xval_t v, input logic [2:0] fl, input logic open_b,
                                       input spec_t sp, input rnd_e mode);
    unum_t r;
    logic  ovf, inx, sgn, away;
    xval_t mx;
    {ovf, inx, sgn} = fl;
    away = (mode == RND_UP && !sgn) || (mode == RND_DOWN && sgn);
    mx   = '{s: sgn, e: 16'hFFFF, f: 32'hFFFF_FFFE};
    if (sp.special)   r = sp.nan ? mk_nan(sp.sign) : mk_inf(sp.sign, open_b);
    else if (ovf)     r = away ? mk_inf(sgn, 1'b1) : mk_x(mx, 1'b1);
    else              r = mk_x(v, open_b | inx);
    return r;
  endfunction

  always_comb begin
    res_o      = '0;
    res_o.left = pack_bound(lb_i, lb_flags_i, open_i[0], special_i.lb,
                            special_i.ubound ? RND_DOWN : RND_TRUNC);
    res_o.left.second = special_i.ubound;
    if (special_i.ubound) begin
      res_o.right        = pack_bound(ub_i, ub_flags_i, open_i[1], special_i.ub, RND_UP);
      res_o.right.second = 1'b0;
    end
  end

endmodule
