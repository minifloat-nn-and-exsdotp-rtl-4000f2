// fp_ref_pkg: exact reference model for the ExSdotp, ExVsum and Vsum
// operations, used by the testbenches.
//
// It works in a completely different way from the hardware: every operand and
// every product is converted to one very wide signed fixed-point number (the
// bit at index FIX_OFF has weight 2^0), the three terms are summed exactly, and
// the exact sum is rounded once to the destination format. No sorting, no
// alignment shifts, no sticky bits. The special-value rules are the IEEE-754
// ones: NaN in or an invalid operation (inf*0, inf-inf, signalling NaN) gives
// the canonical quiet NaN; an exact zero sum keeps the common sign of zero
// addends, otherwise it is +0 (-0 when rounding down).
package fp_ref_pkg;
  import mfnn_pkg::*;

  localparam int FIX_W   = 720;
  localparam int FIX_OFF = 340;

  typedef logic signed [FIX_W-1:0] fix_t;

  typedef struct {
    logic  sign;
    logic  nan;
    logic  snan;
    logic  inf;
    logic  zero;
    longint unsigned sig;  // integer significand
    int    lsb_exp;        // weight of sig's LSB is 2^lsb_exp
  } dec_t;

  typedef struct {
    logic [31:0] result;
    logic        nv;
    logic        of;
    logic        nx;
  } ref_t;

  function automatic dec_t decode(logic [31:0] v, fp_format_e f);
    dec_t  d;
    int    eb, mb, bias;
    longint unsigned ef, mf;
    eb   = int'(exp_bits(f));
    mb   = int'(man_bits(f));
    bias = (1 << (eb - 1)) - 1;
    ef   = (longint'(v) >> mb) & ((64'd1 << eb) - 1);
    mf   = longint'(v) & ((64'd1 << mb) - 1);
    d.sign = v[eb+mb];
    d.nan  = (ef == (64'd1 << eb) - 1) && (mf != 0);
    d.snan = d.nan && (((mf >> (mb - 1)) & 1) == 0);
    d.inf  = (ef == (64'd1 << eb) - 1) && (mf == 0);
    d.zero = (ef == 0) && (mf == 0);
    if (ef == 0) begin
      d.sig     = mf;
      d.lsb_exp = 1 - bias - mb;
    end else begin
      d.sig     = mf | (64'd1 << mb);
      d.lsb_exp = int'(ef) - bias - mb;
    end
    return d;
  endfunction

  function automatic fix_t to_fix(logic sign, longint unsigned sig, int lsb_exp);
    fix_t m;
    m = fix_t'(sig);
    m = m <<< (lsb_exp + FIX_OFF);
    return sign ? -m : m;
  endfunction

  function automatic logic [31:0] canonical_nan(fp_format_e f);
    int eb, mb;
    eb = int'(exp_bits(f));
    mb = int'(man_bits(f));
    return (((32'd1 << eb) - 1) << mb) | (32'd1 << (mb - 1));
  endfunction

  // Round an exact non-zero value to format f.
  function automatic ref_t round_fix(fix_t val, fp_format_e f, rnd_mode_e rm);
    ref_t  r;
    logic  sign;
    fix_t  mag;
    int    eb, mb, bias, emin, maxexp, top, e, lsbi;
    longint unsigned mant;
    logic  g, s, rup;
    int    biased;
    eb     = int'(exp_bits(f));
    mb     = int'(man_bits(f));
    bias   = (1 << (eb - 1)) - 1;
    emin   = 1 - bias;
    maxexp = (1 << eb) - 1;
    sign   = val[FIX_W-1];
    mag    = sign ? -val : val;
    top    = 0;
    for (int i = 0; i < FIX_W; i++) if (mag[i]) top = i;
    e = top - FIX_OFF;
    if (e < emin) e = emin;
    lsbi = e - mb + FIX_OFF;
    mant = longint'(mag >> lsbi);
    g    = (lsbi > 0) ? mag[lsbi-1] : 1'b0;
    s    = 1'b0;
    for (int i = 0; i < lsbi - 1; i++) if (mag[i]) s = 1'b1;
    case (rm)
      RNE:     rup = g & (s | mant[0]);
      RTZ:     rup = 1'b0;
      RDN:     rup = (g | s) & sign;
      RUP:     rup = (g | s) & ~sign;
      default: rup = g;
    endcase
    mant = mant + rup;
    if (mant == (64'd1 << (mb + 1))) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    biased = (mant >= (64'd1 << mb)) ? e + bias : 0;
    r.nv = 1'b0;
    r.of = 1'b0;
    r.nx = g | s;
    if (biased >= maxexp) begin
      r.of = 1'b1;
      r.nx = 1'b1;
      if (rm == RTZ || (rm == RDN && !sign) || (rm == RUP && sign))
        r.result = (32'(sign) << (eb + mb)) | (32'(maxexp - 1) << mb) | ((32'd1 << mb) - 1);
      else
        r.result = (32'(sign) << (eb + mb)) | (32'(maxexp) << mb);
    end else begin
      r.result = (32'(sign) << (eb + mb)) | (32'(biased) << mb) | 32'(mant & ((64'd1 << mb) - 1));
    end
    return r;
  endfunction

  // Reference for one ExSdotp / ExVsum / Vsum operation. Operands are
  // right-aligned in 32-bit containers.
  function automatic ref_t ref_op(sdotp_op_e op, fp_format_e sf, fp_format_e df, rnd_mode_e rm,
                                  logic [31:0] a, logic [31:0] b, logic [31:0] c,
                                  logic [31:0] d, logic [31:0] e);
    dec_t  da, db, dc, dd, de;
    ref_t  r;
    logic  s1, s2, i1, i2, z1, z2, nan_in, inv, ipos, ineg;
    fix_t  t1, t2, t3, sum;
    da = decode(a, sf);
    dc = decode(c, sf);
    de = decode(e, df);
    if (op == EXSDOTP) begin
      db = decode(b, sf);
      dd = decode(d, sf);
    end else begin
      db = '{sign: 0, nan: 0, snan: 0, inf: 0, zero: 0, sig: 1, lsb_exp: 0};
      dd = db;
    end
    nan_in = da.nan | db.nan | dc.nan | dd.nan | de.nan;
    inv    = da.snan | db.snan | dc.snan | dd.snan | de.snan
           | (da.inf & db.zero) | (da.zero & db.inf) | (dc.inf & dd.zero) | (dc.zero & dd.inf);
    s1 = da.sign ^ db.sign;
    s2 = dc.sign ^ dd.sign;
    i1 = da.inf | db.inf;
    i2 = dc.inf | dd.inf;
    z1 = da.zero | db.zero;
    z2 = dc.zero | dd.zero;
    ipos = (i1 & !s1) | (i2 & !s2) | (de.inf & !de.sign);
    ineg = (i1 & s1) | (i2 & s2) | (de.inf & de.sign);
    inv  = inv | (ipos & ineg);
    r.nv = 1'b0;
    r.of = 1'b0;
    r.nx = 1'b0;
    if (nan_in || inv) begin
      r.result = canonical_nan(df);
      r.nv     = inv;
      return r;
    end
    if (ipos || ineg) begin
      r.result = (32'(ineg) << (exp_bits(df) + man_bits(df))) | (((32'd1 << exp_bits(df)) - 1) << man_bits(df));
      return r;
    end
    t1  = to_fix(s1, da.sig * db.sig, da.lsb_exp + db.lsb_exp);
    t2  = to_fix(s2, dc.sig * dd.sig, dc.lsb_exp + dd.lsb_exp);
    t3  = to_fix(de.sign, de.sig, de.lsb_exp);
    sum = t1 + t2 + t3;
    if (sum == '0) begin
      logic zs;
      if (z1 && z2 && de.zero)
        zs = (rm == RDN) ? (s1 | s2 | de.sign) : (s1 & s2 & de.sign);
      else
        zs = (rm == RDN);
      r.result = 32'(zs) << (exp_bits(df) + man_bits(df));
      return r;
    end
    return round_fix(sum, df, rm);
  endfunction

  typedef struct {
    logic [63:0] result;
    logic        nv;
    logic        of;
    logic        nx;
  } ref64_t;

  // Reference for one SIMD instruction on 64-bit registers: lane i uses
  // source elements 2i and 2i+1 of rs1 (and rs2) and accumulator element i;
  // ExSdotp/ExVsum have 64/dw lanes, Vsum 32/dw lanes; bits of unused lanes
  // keep the accumulator's value.
  function automatic ref64_t ref_simd(sdotp_op_e op, fp_format_e sf, fp_format_e df, rnd_mode_e rm,
                                      logic [63:0] rs1, logic [63:0] rs2, logic [63:0] acc);
    ref64_t r;
    ref_t   l;
    int     sw, dw, n;
    logic [63:0] sm, dm;
    sw = int'(fmt_width(sf));
    dw = int'(fmt_width(df));
    sm = (64'd1 << sw) - 1;
    dm = (64'd1 << dw) - 1;
    n  = (op == VSUM) ? 32 / dw : 64 / dw;
    r.result = acc;
    r.nv = 0;
    r.of = 0;
    r.nx = 0;
    for (int i = 0; i < n; i++) begin
      l = ref_op(op, sf, df, rm,
                 32'((rs1 >> (sw * 2 * i)) & sm), 32'((rs2 >> (sw * 2 * i)) & sm),
                 32'((rs1 >> (sw * (2 * i + 1))) & sm), 32'((rs2 >> (sw * (2 * i + 1))) & sm),
                 32'((acc >> (dw * i)) & dm));
      r.result = (r.result & ~(dm << (dw * i))) | ((64'(l.result) & dm) << (dw * i));
      r.nv |= l.nv;
      r.of |= l.of;
      r.nx |= l.nx;
    end
    return r;
  endfunction

  // Random 64-bit register of packed elements of format f.
  function automatic logic [63:0] rand_reg(fp_format_e f, int exp_lo, int exp_hi);
    logic [63:0] v;
    int w;
    w = int'(fmt_width(f));
    v = '0;
    for (int i = 0; i < 64 / w; i++) v |= 64'(rand_val(f, exp_lo, exp_hi)) << (w * i);
    return v;
  endfunction

  // Random value of format f, biased towards the cases that matter: zeros,
  // subnormals, values of similar magnitude, and occasionally inf/NaN.
  function automatic logic [31:0] rand_val(fp_format_e f, int exp_lo, int exp_hi);
    int eb, mb, r, ef;
    logic [31:0] mf;
    logic sgn;
    eb  = int'(exp_bits(f));
    mb  = int'(man_bits(f));
    r   = int'($urandom % 64);
    sgn = 1'($urandom);
    mf  = $urandom & ((32'd1 << mb) - 1);
    if (r < 3) begin                 // zero
      ef = 0;
      mf = 0;
    end else if (r < 8) begin        // subnormal
      ef = 0;
    end else if (r == 8) begin       // inf
      ef = (1 << eb) - 1;
      mf = 0;
    end else if (r == 9) begin       // NaN
      ef = (1 << eb) - 1;
      mf = mf | 1;
    end else begin
      ef = exp_lo + int'($urandom % unsigned'(exp_hi - exp_lo + 1));
      if (ef < 1) ef = 1;
      if (ef > (1 << eb) - 2) ef = (1 << eb) - 2;
    end
    return (32'(sgn) << (eb + mb)) | (32'(ef) << mb) | mf;
  endfunction

endpackage
