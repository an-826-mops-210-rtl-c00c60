// unum_fp_add: one bound adder (LB Add / UB Add) of the ubound adder.
//
// Adds two expanded values (sign, 16-bit exponent with bias 32767, 32-bit
// fraction with hidden bit, exponent 0 = subnormal) or subtracts the second
// from the first. The smaller operand is aligned with a guard, a round and a
// sticky bit, so the unit knows exactly whether the sum fits in 32 fraction
// bits. If it does not, the result is rounded in the direction the bound
// needs and inexact_o (the ubit) is raised:
//   RND_DOWN  lower bound of an interval, toward -infinity
//   RND_UP    upper bound of an interval, toward +infinity
//   RND_TRUNC single unum, magnitude truncated so that (x, x+ulp) holds the sum
// ovf_o reports a magnitude beyond the largest finite unum (exponent 0xFFFF,
// fraction 0xFFFFFFFE); sign_o is the sign of the exact sum (exact zero is
// positive). The flag names ovflw, ubit and int. sign and all widths follow
// the paper's adder diagram; the rounding directions and the alignment scheme
// are this design's.
//
// Timing: purely combinational; the ubound adder registers its outputs.
module unum_fp_add
  import unum_pkg::*;
(
  input  xval_t x_i,
  input  xval_t y_i,
  input  logic  neg_y_i,
  input  rnd_e  mode_i,
  output xval_t res_o,
  output logic  ovf_o,
  output logic  inexact_o,
  output logic  sign_o
);

  always_comb begin
    logic        sx, sy, sb, swap, eff_sub, rnd_away;
    logic [32:0] mx, my, mb, ms;
    logic [16:0] ex, ey, eb, es_, d, e;
    logic [35:0] big, sml, lostmask;
    logic [36:0] sum;
    logic [5:0]  lz;
    logic [16:0] sh;
    logic [33:0] sig;
    logic        sticky;

    lostmask = '0; lz = '0; sh = '0; sig = '0; sum = '0; e = '0; rnd_away = 1'b0;
    res_o = '0;
    sx = x_i.s;
    sy = y_i.s ^ neg_y_i;
    mx = {(x_i.e != '0), x_i.f};
    my = {(y_i.e != '0), y_i.f};
    ex = {1'b0, (x_i.e == '0) ? 16'd1 : x_i.e};
    ey = {1'b0, (y_i.e == '0) ? 16'd1 : y_i.e};

    // larger magnitude first
    swap = {ey, my} > {ex, mx};
    mb   = swap ? my : mx;
    ms   = swap ? mx : my;
    eb   = swap ? ey : ex;
    es_  = swap ? ex : ey;
    sb   = swap ? sy : sx;
    eff_sub = sx ^ sy;

    // align with guard, round and sticky bits
    d   = eb - es_;
    big = {mb, 3'b000};
    if (d >= 17'd36) begin
      sml    = '0;
      sticky = (ms != '0);
    end else begin
      lostmask = (36'd1 << d[5:0]) - 36'd1;
      sml      = {ms, 3'b000} >> d[5:0];
      sticky   = (({ms, 3'b000} & lostmask) != '0);
    end
    sml[0] = sml[0] | sticky;

    sum = eff_sub ? ({1'b0, big} - {1'b0, sml}) : ({1'b0, big} + {1'b0, sml});
    e   = eb;

    // normalise
    if (sum[36]) begin
      sum = {1'b0, sum[36:2], sum[1] | sum[0]};
      e   = e + 17'd1;
    end else begin
      lz = 6'd36;
      for (int i = 0; i < 36; i++) if (sum[i]) lz = 6'(35 - i);
      sh = (17'(lz) < e - 17'd1) ? 17'(lz) : e - 17'd1;
      sum = sum << sh[5:0];
      e   = e - sh;
    end

    inexact_o = (sum[2:0] != '0);
    sign_o    = (sum == '0) ? 1'b0 : sb;
    rnd_away  = inexact_o && ((mode_i == RND_UP && !sign_o) || (mode_i == RND_DOWN && sign_o));

    // round (magnitude up by one ulp when rounding away from zero)
    sig = {1'b0, sum[35:3]} + {33'd0, rnd_away};
    if (sig[33]) begin
      sig = {1'b0, sig[33:1]};
      e   = e + 17'd1;
    end
    if (!sig[32]) e = 17'd0;  // subnormal or zero

    ovf_o     = (e > 17'h0FFFF) || (e == 17'h0FFFF && sig[31:0] == 32'hFFFF_FFFF);
    res_o.s   = sign_o;
    res_o.e   = e[15:0];
    res_o.f   = sig[31:0];
  end

endmodule
