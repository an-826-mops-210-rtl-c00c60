// unum_pkg: types, constants and pure functions shared by the unum {4,5} ALU.
//
// A unum in the {4,5} environment has a sign, an exponent of es = 1..16 bits,
// a fraction of fs = 1..32 bits, a ubit and the two size fields es-1 (4 bits)
// and fs-1 (5 bits). Inside the register file every unum is held unpacked in
// a fixed 64-bit slot (unum_t) that adds the summary bits NaN, +-Inf, =0 and
// the "2nd" flag; a ubound (an interval given by two unums) fills both
// halves of a 128-bit word, the left (lower) bound in bits [63:0] with 2nd=1
// and the right (upper) bound in bits [127:64]. A single unum sits in the
// lower half with 2nd=0. The field order and widths follow the published
// register layout; the exponent and fraction values are stored right-aligned
// in their 16- and 32-bit fields (only the low es resp. fs bits are used),
// which is this design's reading of the layout.
//
// Value of a finite unum with bias = 2^(es-1)-1:
//   e != 0 : (-1)^s * 2^(e-bias) * (1 + f/2^fs)
//   e == 0 : (-1)^s * 2^(1-bias) * (f/2^fs)
// ubit = 1 on a single unum means the open interval (x, x+ulp) beyond x in
// magnitude, ulp = 2^(exponent-fs). At es=16, fs=32 the all-ones pattern is
// infinity (ubit 0) or NaN (ubit 1).
//
// Ubound endpoints in this design are values with an "open" flag: the ubit
// of a bound says whether the endpoint itself is excluded. An open infinite
// endpoint is stored as the all-ones pattern with ubit 1 and the summary bits
// Inf=1, NaN=0; the summary bits tell it apart from NaN.
//
// "Expanded" means es=16, fs=32: every value of the environment is held at
// full precision with a 16-bit exponent (bias 32767) and a 32-bit fraction,
// normalised wherever the 16-bit exponent allows.
package unum_pkg;

  localparam int unsigned ES_MAX   = 16;
  localparam int unsigned FS_MAX   = 32;
  localparam int unsigned XW       = 1 + ES_MAX + FS_MAX;  // d_x: sign|exp|frac = 49
  localparam logic [15:0] BIAS_MAX = 16'd32767;

  // One 64-bit slot of the register file, MSB first.
  typedef struct packed {
    logic        dc;      // unused
    logic        s;       // sign
    logic        nan;     // summary: NaN
    logic        inf;     // summary: +-infinity
    logic        zero;    // summary: exact zero
    logic        second;  // 1: this word holds a ubound
    logic [15:0] e;       // exponent, right-aligned, es bits used
    logic [31:0] f;       // fraction, right-aligned, fs bits used
    logic        u;       // ubit
    logic [3:0]  esm1;    // es-1
    logic [4:0]  fsm1;    // fs-1
  } unum_t;

  typedef struct packed {
    unum_t right;         // bits [127:64]
    unum_t left;          // bits [63:0]
  } ubound_t;

  // Expanded value of one bound: the 49-bit d_x of the adder.
  typedef struct packed {
    logic        s;
    logic [15:0] e;
    logic [31:0] f;
  } xval_t;

  // ALU operations.
  typedef enum logic [1:0] {
    OP_ADD   = 2'd0,
    OP_SUB   = 2'd1,
    OP_OPT   = 2'd2,
    OP_UNIFY = 2'd3
  } alu_op_e;

  // Rounding mode of a bound adder.
  typedef enum logic [1:0] {
    RND_TRUNC = 2'd0,  // single unum: truncate magnitude, set ubit
    RND_DOWN  = 2'd1,  // lower bound: toward -infinity
    RND_UP    = 2'd2   // upper bound: toward +infinity
  } rnd_e;

  // Per-bound part of the special bits sent from the adder control to pack.
  typedef struct packed {
    logic special;  // result is NaN or infinity, ignore the adder
    logic nan;
    logic inf;
    logic sign;
  } spec_t;

  // Operand selection and rounding chosen by the adder control (Fig. 4 table).
  typedef struct packed {
    logic lb_y_d;   // lower-bound adder takes d instead of c
    logic ub_x_b;   // upper-bound adder takes b instead of a
    logic ub_y_d;   // upper-bound adder takes d instead of c
    logic neg;      // subtract: negate the second operand of both adders
    rnd_e lb_mode;
    rnd_e ub_mode;
    logic lb_open;  // lower result bound is open (OR of its operand ubits)
    logic ub_open;
  } add_ctrl_t;

  // The 9 special bits: both bounds plus "result is a ubound".
  typedef struct packed {
    logic  ubound;
    spec_t ub;
    spec_t lb;
  } special_t;

  // Test-bed instruction: opcode and three register numbers (17 bits).
  typedef struct packed {
    alu_op_e    op;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
  } instr_t;

  // Commands of the test-bed memory controller.
  typedef enum logic [2:0] {
    CMD_NOP     = 3'd0,
    CMD_IMEM_WR = 3'd1,  // instruction memory[addr] <= data[16:0]
    CMD_IMEM_RD = 3'd2,  // respond with instruction memory[addr]
    CMD_RF_WR   = 3'd3,  // register[addr] <= data
    CMD_RF_RD   = 3'd4,  // respond with register[addr]
    CMD_RUN     = 3'd5,  // run instructions 0..addr, repeat while data[0]
    CMD_STOP    = 3'd6   // end a repeated run at its next wrap-around
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e      op;
    logic [9:0]   addr;
    logic [127:0] data;
  } cmd_t;

  // ---------------------------------------------------------------------------
  // Canonical patterns at es=16, fs=32.
  // ---------------------------------------------------------------------------
  function automatic unum_t mk_nan(input logic s);
    unum_t r;
    r = '0;
    r.s = s; r.nan = 1'b1; r.e = '1; r.f = '1; r.u = 1'b1;
    r.esm1 = 4'd15; r.fsm1 = 5'd31;
    return r;
  endfunction

  function automatic unum_t mk_inf(input logic s, input logic open_end);
    unum_t r;
    r = '0;
    r.s = s; r.inf = 1'b1; r.e = '1; r.f = '1; r.u = open_end;
    r.esm1 = 4'd15; r.fsm1 = 5'd31;
    return r;
  endfunction

  // Expanded finite value (es=16, fs=32) with summary bits.
  function automatic unum_t mk_x(input xval_t v, input logic u);
    unum_t r;
    r = '0;
    r.s = v.s; r.e = v.e; r.f = v.f; r.u = u;
    r.zero = (v.e == '0) && (v.f == '0) && !u;
    r.esm1 = 4'd15; r.fsm1 = 5'd31;
    return r;
  endfunction

  function automatic xval_t xval_of(input unum_t u);
    xval_t v;
    v.s = u.s; v.e = u.e; v.f = u.f;
    return v;
  endfunction

  // Number of leading zeros of a 32-bit word (32 for zero).
  function automatic logic [5:0] lzc32(input logic [31:0] x);
    logic [5:0] n;
    n = 6'd32;
    for (int i = 0; i < 32; i++) if (x[i]) n = 6'(31 - i);
    return n;
  endfunction

  // Number of trailing zeros of a 32-bit word (32 for zero).
  function automatic logic [5:0] tzc32(input logic [31:0] x);
    logic [5:0] n;
    n = 6'd32;
    for (int i = 31; i >= 0; i--) if (x[i]) n = 6'(i);
    return n;
  endfunction

  // ---------------------------------------------------------------------------
  // Expansion of one finite, non-NaN slot to es=16, fs=32 (value preserving).
  // Returns the expanded value; ulp_sh is the bit position, within the 33-bit
  // significand {hidden, f}, of the original ulp (used to build x+ulp).
  // ---------------------------------------------------------------------------
  function automatic xval_t expand_val(input unum_t u, output logic [5:0] ulp_sh);
    xval_t       v;
    int          es, fs, bias, ex, sh;
    logic [31:0] fv, fl;
    logic [15:0] ev;
    es   = int'(u.esm1) + 1;
    fs   = int'(u.fsm1) + 1;
    bias = (1 << (es - 1)) - 1;
    fv   = u.f & ((fs == 32) ? 32'hFFFF_FFFF : 32'((1 << fs) - 1));
    fl   = fv << (32 - fs);
    ev   = u.e & ((es == 16) ? 16'hFFFF : 16'((1 << es) - 1));
    v.s  = u.s;
    ulp_sh = 6'(32 - fs);
    if (ev != '0) begin
      ex  = int'(ev) - bias;
      v.e = 16'(ex + 32767);
      v.f = fl;
    end else if (es == 16 || fl == '0) begin
      v.e = '0;
      v.f = fl;
    end else begin
      // subnormal of a narrower environment: normalise
      sh  = int'(lzc32(fl)) + 1;
      v.f = fl << sh;
      v.e = 16'((1 - bias) - sh + 32767);
      ulp_sh = 6'(32 - fs + sh);
    end
    return v;
  endfunction

  // Expands one slot, value preserving; NaN, infinity and zero are taken from
  // the summary bits and replaced by their canonical patterns.
  function automatic unum_t expand_slot(input unum_t u);
    logic [5:0] ush;
    if (u.nan)       return mk_nan(u.s);
    else if (u.inf)  return mk_inf(u.s, u.u);
    else if (u.zero) return mk_x('{s: u.s, e: '0, f: '0}, 1'b0);
    else             return mk_x(expand_val(u, ush), u.u);
  endfunction

  // x + 2^ulp_sh (in units of the 33-bit significand) for an expanded value,
  // magnitude only. ovf is set when the result is not finite.
  function automatic xval_t add_ulp(input xval_t x, input logic [5:0] ulp_sh, output logic ovf);
    logic [33:0] sig;
    xval_t       r;
    sig = {1'b0, (x.e != '0), x.f} + (34'd1 << ulp_sh);
    r.s = x.s;
    ovf = 1'b0;
    if (x.e == '0) begin
      r.e = sig[32] ? 16'd1 : 16'd0;
      r.f = sig[31:0];
    end else if (sig[33]) begin
      r.e = x.e + 16'd1;
      r.f = sig[32:1];
      ovf = (x.e == 16'hFFFF);
    end else begin
      r.e = x.e;
      r.f = sig[31:0];
    end
    if (r.e == 16'hFFFF && r.f == 32'hFFFF_FFFF) ovf = 1'b1;
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Smallest es (1..16) whose normal range holds the unbiased exponent ex.
  // ---------------------------------------------------------------------------
  function automatic int min_es_normal(input int ex);
    int r;
    r = 16;
    for (int es = 16; es >= 1; es--) begin
      int bias;
      bias = (1 << (es - 1)) - 1;
      if (ex >= 1 - bias && ex <= bias + 1) r = es;
    end
    return r;
  endfunction

  // Encode x (expanded, normal, E >= 1) as a normal unum with given es, fs.
  function automatic unum_t encode_normal(input xval_t x, input int es, input int fs, input logic u);
    unum_t r;
    int    bias, ex;
    bias   = (1 << (es - 1)) - 1;
    ex     = int'(x.e) - 32767;
    r      = '0;
    r.s    = x.s;
    r.e    = 16'(ex + bias);
    r.f    = x.f >> (32 - fs);
    r.u    = u;
    r.esm1 = 4'(es - 1);
    r.fsm1 = 5'(fs - 1);
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Lossless compression of an exact value (or of a ubound endpoint, whose
  // ubit is an open flag): smallest es+fs, ties to the smaller es, trying
  // every es with normal and subnormal encodings.
  // ---------------------------------------------------------------------------
  function automatic unum_t compress_exact(input xval_t x, input logic u);
    unum_t r;
    int    ex, tz, best_cost, best_es, best_fs;
    logic  best_sub;
    r = '0;
    r.s = x.s;
    r.u = u;
    if (x.e == '0 && x.f == '0) begin
      r.zero = !u;
      return r;  // es=1, fs=1, e=0, f=0
    end
    tz = int'(tzc32(x.f));
    if (x.e == '0) begin
      // subnormal at es=16: only es=16 can hold it
      r.f    = x.f >> tz;
      r.esm1 = 4'd15;
      r.fsm1 = 5'((32 - tz) - 1);
      return r;
    end
    ex        = int'(x.e) - 32767;
    best_cost = 1000; best_es = 16; best_fs = 32; best_sub = 1'b0;
    for (int es = 1; es <= 16; es++) begin
      int bias, fs, k;
      bias = (1 << (es - 1)) - 1;
      if (ex >= 1 - bias && ex <= bias + 1) begin
        fs = (32 - tz < 1) ? 1 : 32 - tz;
        if (es + fs < best_cost) begin
          best_cost = es + fs; best_es = es; best_fs = fs; best_sub = 1'b0;
        end
      end else if (ex < 1 - bias) begin
        k  = (1 - bias) - ex;
        fs = k + (32 - tz);
        if (fs <= 32 && es + fs < best_cost) begin
          best_cost = es + fs; best_es = es; best_fs = fs; best_sub = 1'b1;
        end
      end
    end
    if (best_sub) begin
      r.e = '0;
      r.f = 32'({1'b1, x.f} >> tz);
    end else begin
      r.e = 16'(ex + ((1 << (best_es - 1)) - 1));
      r.f = x.f >> (32 - best_fs);
    end
    r.esm1 = 4'(best_es - 1);
    r.fsm1 = 5'(best_fs - 1);
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Smallest unum cell (x, x+ulp) holding the magnitude interval lo..hi.
  // lo, hi are expanded magnitudes with lo <= hi; lo_open / hi_open say whether
  // the ends are excluded. ok: a cell was found (lo normal, hi at most one
  // binade above lo); fs: its fraction size; xo: x; exact: the cell equals
  // the interval exactly.
  // ---------------------------------------------------------------------------
  function automatic logic cell_fit(input xval_t lo, input xval_t hi,
                                    input logic lo_open, input logic hi_open,
                                    output int fs_o, output xval_t xo, output logic exact);
    logic [34:0] l, h, x, top;
    logic        ok;
    ok = 1'b0; fs_o = 1; exact = 1'b0;
    xo = lo;
    if (lo.e == '0) return 1'b0;
    if (!(hi.e == lo.e || hi.e == lo.e + 16'd1)) return 1'b0;
    l = {2'b00, 1'b1, lo.f};
    h = (hi.e == lo.e) ? {2'b00, 1'b1, hi.f} : {1'b0, 1'b1, hi.f, 1'b0};
    for (int fs = 1; fs <= 32; fs++) begin
      logic [34:0] step;
      step = 35'd1 << (32 - fs);
      x    = l & ~(step - 35'd1);
      top  = x + step;
      if ((l > x || lo_open) && (h < top || (h == top && hi_open))) begin
        ok    = 1'b1;
        fs_o  = fs;
        xo.f  = x[31:0];
        exact = (l == x) && (h == top) && lo_open && hi_open;
      end
    end
    return ok;
  endfunction

endpackage
