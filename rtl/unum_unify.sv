// unum_unify: lossy merge of a ubound into one unum.
//
// Operand 1 enters in register format (the unit sits beside the expand units,
// not behind them) and is expanded here, bound by bound. A ubound is replaced
// by the single unum with the smallest interval that contains it, trying the
// kinds of cell a unum can be, from narrow to wide:
//   0. both ends the same closed point: that exact value, compressed;
//   1. a normal cell (x, x+ulp) inside one binade: for every fraction size
//      fs = 1..32 the cell with x = lo cut to fs fraction bits is checked to
//      contain lo and hi, taking open and closed ends into account; the
//      largest fs that fits wins, and x is encoded with the smallest exponent
//      size that holds its exponent as a normal number;
//   2. a whole binade (2^k, 2^(k+1)): the subnormal unum f = 1 whose ulp is
//      2^k, which exists only for k = 1 - bias - fs of some es, fs;
//   3. a cell reaching down to zero, (0, 2^k): the inexact zero with the
//      smallest such 2^k that still reaches beyond hi; the lower end must be
//      above zero or open at zero;
//   4. (maxreal, inf) and its negative, for an interval from an open maxreal
//      to an open infinity.
// Intervals on the negative side are handled on magnitudes. The ubit of the
// result is set. unified_o tells whether a merge happened. Single unums, NaN
// and intervals that cross zero or that no cell holds (a closed zero end, an
// infinite end beyond a finite one below maxreal) are returned unchanged. For
// a lower end that is subnormal at es=16 only cells of kind 3 are tried.
//
// The paper describes unify as merging a ubound into the smallest unum that
// holds it, whenever possible, and marks it as able to set the ubit; the
// search above is this design's.
//
// Timing: purely combinational.
module unum_unify
  import unum_pkg::*;
(
  input  ubound_t op_i,
  output ubound_t res_o,
  output logic    unified_o
);

  // Subnormal unums with f = 0 or f = 1 and the ubit set are the cells
  // (0, 2^k) and (2^k, 2^(k+1)) with k = 1 - bias - fs, i.e. for a given es
  // every k in [-bias-31, -bias]. Finds the smallest such k >= need, and for
  // it the encoding with the least es + fs.
  function automatic logic sub_cell(input int need, output int k_o, output int es_o,
                                    output int fs_o);
    logic found;
    found = 1'b0; k_o = 0; es_o = 1; fs_o = 1;
    for (int es = 1; es <= 16; es++) begin
      int bias, k, fs;
      bias = (1 << (es - 1)) - 1;
      k    = (need > -bias - 31) ? need : -bias - 31;
      fs   = 1 - bias - k;
      if (need <= -bias && (!found || k < k_o || (k == k_o && es + fs < es_o + fs_o))) begin
        found = 1'b1; k_o = k; es_o = es; fs_o = fs;
      end
    end
    return found;
  endfunction

  // Subnormal unum with ubit set: sign, fraction (0 or 1) and sizes.
  function automatic unum_t mk_sub_cell(input logic s, input logic one, input int es, input int fs);
    unum_t r;
    r      = '0;
    r.s    = s;
    r.f    = {31'd0, one};
    r.u    = 1'b1;
    r.esm1 = 4'(es - 1);
    r.fsm1 = 5'(fs - 1);
    return r;
  endfunction

  always_comb begin
    unum_t l, r;
    xval_t lo, hi, xo;
    logic  ok, exact, lz, rz, lo_open, hi_open, pos, neg, s, pow2;
    int    fs, k, ces, cfs, ex, lg, need;

    res_o     = op_i;
    unified_o = 1'b0;
    lo        = '0;
    hi        = '0;
    xo        = '0;
    ok        = 1'b0;
    exact     = 1'b0;
    lo_open   = 1'b0;
    hi_open   = 1'b0;
    pow2      = 1'b0;
    s         = 1'b0;
    fs        = 1;
    k         = 0;
    ces       = 1;
    cfs       = 1;
    ex        = 0;
    lg        = 0;
    need      = 0;
    l         = expand_slot(op_i.left);
    r         = expand_slot(op_i.right);
    lz        = (l.e == '0) && (l.f == '0);
    rz        = (r.e == '0) && (r.f == '0);
    // the interval lies on one side of zero (it may touch it)
    pos       = (lz || !l.s) && !rz && !r.s;
    neg       = (rz || r.s) && !lz && l.s;

    if (op_i.left.second && !l.nan && !r.nan) begin
      if (!l.inf && !r.inf && !l.u && !r.u && xval_of(l) == xval_of(r)) begin
        // one closed point: the exact unum
        res_o      = '0;
        res_o.left = compress_exact(xval_of(l), 1'b0);
        unified_o  = 1'b1;
      end else if (!l.inf && !r.inf && (pos || neg)) begin
        // magnitudes lo < hi, sign s
        s       = neg;
        lo      = neg ? xval_of(r) : xval_of(l);
        hi      = neg ? xval_of(l) : xval_of(r);
        lo_open = neg ? r.u : l.u;
        hi_open = neg ? l.u : r.u;
        lo.s    = 1'b0;
        hi.s    = 1'b0;
        ex      = int'(lo.e) - 32767;
        // 1. a normal cell (x, x+ulp) inside one binade
        if (lo.e != '0) ok = cell_fit(lo, hi, lo_open, hi_open, fs, xo, exact);
        if (ok) begin
          xo.s       = s;
          res_o      = '0;
          res_o.left = encode_normal(xo, min_es_normal(int'(xo.e) - 32767), fs, 1'b1);
          unified_o  = 1'b1;
        end else if (lo.e != '0 && (lo.f != '0 || lo_open) &&
                     (hi.e == lo.e || (hi.e == lo.e + 16'd1 && hi.f == '0 && hi_open)) &&
                     sub_cell(ex, k, ces, cfs) && k == ex) begin
          // 2. the whole binade (2^ex, 2^(ex+1))
          res_o      = '0;
          res_o.left = mk_sub_cell(s, 1'b1, ces, cfs);
          unified_o  = 1'b1;
        end else begin
          // 3. the cell (0, 2^k) reaching down to zero
          if (hi.e != '0) begin
            lg   = int'(hi.e) - 32767;
            pow2 = (hi.f == '0);
          end else begin
            lg   = -32799;
            for (int i = 0; i < 32; i++) if (hi.f[i]) lg = -32798 + i;
            pow2 = ((hi.f & (hi.f - 32'd1)) == '0);
          end
          need = (pow2 && hi_open) ? lg : lg + 1;
          if ((lo.e != '0 || lo.f != '0 || lo_open) && sub_cell(need, k, ces, cfs)) begin
            res_o      = '0;
            res_o.left = mk_sub_cell(s, 1'b0, ces, cfs);
            unified_o  = 1'b1;
          end
        end
      end else if (l.inf != r.inf && (l.inf ? (l.u && l.s && r.s) : (r.u && !r.s && !l.s))) begin
        // 4. (maxreal, inf) or (-inf, -maxreal): the finite end must be
        //    maxreal itself, open
        lo = l.inf ? xval_of(r) : xval_of(l);
        if (lo.e == 16'hFFFF && lo.f == 32'hFFFF_FFFE && (l.inf ? r.u : l.u)) begin
          res_o      = '0;
          res_o.left = mk_x(lo, 1'b1);
          unified_o  = 1'b1;
        end
      end
    end
  end

endmodule
