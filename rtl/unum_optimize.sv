// unum_optimize: lossless compression of a unum or ubound.
//
// The input is an expanded operand (es=16, fs=32), either the result of the
// ubound adder, which is optimised after every addition, or operand 1 of an
// explicit OPT instruction. Each finite bound is re-encoded with the smallest
// exponent size plus fraction size that still holds its value exactly: all
// sixteen exponent sizes are tried in parallel, with normal and subnormal
// encodings, the fraction size follows from the trailing zeros of the
// fraction, and the cheapest wins (ties go to the smaller exponent size).
//
// An inexact single unum keeps its fraction size, since that size defines its
// ulp and so its interval; only its exponent size shrinks. A ubound whose two
// ends are the same closed point, or two open ends exactly one ulp apart, is
// the same set as one unum and is stored as that single unum. NaN and
// infinities need the full es=16, fs=32 pattern and pass unchanged.
//
// The paper defines optimize as finding the smallest exponent and fraction
// size for a unum or ubound; the search described here, the cost es+fs and
// the ubound collapse are this design's.
//
// Timing: purely combinational.
module unum_optimize
  import unum_pkg::*;
(
  input  ubound_t op_i,
  output ubound_t res_o
);

  function automatic unum_t opt_bound(input unum_t u);
    unum_t r;
    if (u.nan || u.inf) r = u;
    else                r = compress_exact(xval_of(u), u.u);
    return r;
  endfunction

  always_comb begin
    unum_t l, r, c;
    xval_t lo, hi, xo;
    logic  ok, exact;
    int    fs;

    l     = op_i.left;
    r     = op_i.right;
    res_o = '0;
    c     = '0;
    lo    = '0;
    hi    = '0;
    xo    = '0;
    ok    = 1'b0;
    exact = 1'b0;
    fs    = 1;

    if (!l.second) begin
      // single unum
      if (l.nan || l.inf)  res_o.left = l;
      else if (!l.u)       res_o.left = compress_exact(xval_of(l), 1'b0);
      else if (l.e == '0)  res_o.left = l;
      else res_o.left = encode_normal(xval_of(l), min_es_normal(int'(l.e) - 32767),
                                      int'(l.fsm1) + 1, 1'b1);
      res_o.left.second = 1'b0;
    end else begin
      // ubound: try to collapse into a single unum
      if (!l.nan && !l.inf && !r.nan && !r.inf && l.s == r.s) begin
        lo = l.s ? xval_of(r) : xval_of(l);
        hi = l.s ? xval_of(l) : xval_of(r);
        ok = cell_fit(lo, hi, 1'b1, 1'b1, fs, xo, exact);
      end
      if (!l.nan && !l.inf && !r.nan && !r.inf && !l.u && !r.u &&
          xval_of(l) == xval_of(r)) begin
        res_o.left = compress_exact(xval_of(l), 1'b0);
      end else if (ok && exact && l.u && r.u) begin
        c          = encode_normal(xo, min_es_normal(int'(xo.e) - 32767), fs, 1'b1);
        res_o.left = c;
      end else begin
        res_o.left         = opt_bound(l);
        res_o.left.second  = 1'b1;
        res_o.right        = opt_bound(r);
        res_o.right.second = 1'b0;
      end
    end
  end

endmodule
