// exsdotp: fused expanding sum of dot products with a single rounding.
//
//   EXSDOTP : result_2w = a_w * b_w + c_w * d_w + e_2w
//   EXVSUM  : result_2w = a_w + c_w + e_2w          (b and d forced to 1.0)
//   VSUM    : result_2w = a_2w + c_2w + e_2w        (multipliers bypassed)
//
// How it works (the data flow of the paper's ExSdotp figure):
//   1. The operands are unpacked into sign, unbiased exponent and a mantissa
//      with the hidden bit, left-aligned to the widest precision of the unit.
//      Narrower formats thus sit in the upper mantissa bits and the lower
//      exponent bits of the shared datapath.
//   2. Two P_SRC x P_SRC mantissa multipliers form a*b and c*d (2*P_SRC bits),
//      zero-padded to P_DST bits. For VSUM a mux (is_vsum) takes the 2w-bit
//      operands a and c instead.
//   3. The three addends are sorted into max (largest exponent),
//      int(ermediate) and min (ordered by normalized magnitude).
//   4. max and int are widened to 2*P_DST+3 bits, int is shifted right by
//      exp_max-exp_int and the two are added (2*P_DST+4 bits).
//   5. The sum is padded by P_SRC more zero bits; min, widened to
//      2*P_DST+P_SRC+3 bits and shifted by exp_max-exp_min, is added to it
//      (2*P_DST+P_SRC+5 bits).
//   6. If the first sum is exactly zero, the unshifted min addend is used
//      instead of the second sum, so none of its bits are lost.
//   7. One normalization and rounding step to the destination format, with
//      IEEE-754 subnormals, overflow and the five RISC-V rounding modes.
//
// Following the paper: the operations, the source/destination format pairs
// (16-to-32 unit: FP16/FP16alt -> FP32, FP8/FP8alt -> FP16/FP16alt, VSUM on
// FP32/FP16/FP16alt/FP8/FP8alt; 8-to-16 unit: FP8/FP8alt -> FP16/FP16alt and
// VSUM on 16- and 8-bit formats), the widths of every stage, the sorting and
// the exact-zero bypass, and a parametric number of pipeline stages.
// This design's own choices: max is the addend with the largest exponent, but
// int and min are ordered by their normalized magnitude, and two smaller
// addends that cancel each other exactly are detected and dropped; both keep
// the single rounding exact when those two fall into the sticky range. The
// additions are done in two's complement with
// one extra sign bit; bits shifted out of int and min are ORed ("jammed")
// into the LSB of the shifted operand as a sticky bit; all pipeline registers
// sit after the combinational datapath; the handshake is valid/ready; NaN
// results are the canonical quiet NaN; underflow is signalled when the result
// is tiny before rounding and inexact; result bits above the destination
// format width are zero.
//
// Interface: operands are right-aligned in their fields (a w-bit source in
// a[w-1:0], the upper half a-vs only used by VSUM). in_valid/in_ready accept
// one operation per cycle; the result leaves NUM_PIPE_REGS cycles later on
// out_valid/out_ready, with tag and status flags. NUM_PIPE_REGS = 0 gives a
// purely combinational unit.
module exsdotp
  import mfnn_pkg::*;
#(
  parameter int unsigned SRC_WIDTH     = 16,  // w: 16 for the 16-to-32 unit, 8 for 8-to-16
  parameter int unsigned NUM_PIPE_REGS = 3    // SDOTP pipeline depth in the paper's PE
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [2*SRC_WIDTH-1:0]   operand_a_i,  // {a_vs, a}
  input  logic [SRC_WIDTH-1:0]     operand_b_i,
  input  logic [2*SRC_WIDTH-1:0]   operand_c_i,  // {c_vs, c}
  input  logic [SRC_WIDTH-1:0]     operand_d_i,
  input  logic [2*SRC_WIDTH-1:0]   operand_e_i,  // accumulator
  input  sdotp_op_e                op_i,
  input  fp_format_e               src_fmt_i,
  input  fp_format_e               dst_fmt_i,
  input  rnd_mode_e                rnd_mode_i,
  input  logic [TAG_WIDTH-1:0]     tag_i,
  input  logic                     in_valid_i,
  output logic                     in_ready_o,
  output logic [2*SRC_WIDTH-1:0]   result_o,
  output status_t                  status_o,
  output logic [TAG_WIDTH-1:0]     tag_o,
  output logic                     out_valid_o,
  input  logic                     out_ready_i
);

  localparam int unsigned DST_WIDTH = 2 * SRC_WIDTH;
  // Precision (mantissa bits + hidden bit) of the widest source and destination format.
  localparam int unsigned P_SRC = (SRC_WIDTH >= 16) ? 11 : 4;
  localparam int unsigned P_DST = (SRC_WIDTH >= 16) ? 24 : 11;
  localparam int unsigned WA    = 2 * P_DST + 3;          // max / int addend width
  localparam int unsigned WS    = WA + 1;                 // first sum
  localparam int unsigned WM    = 2 * P_DST + P_SRC + 3;  // min addend width
  localparam int unsigned WP    = WS + P_SRC;             // padded first sum
  localparam int unsigned WF    = WP + 1;                 // final sum

  typedef struct packed {
    logic             sign;
    int               exp;   // unbiased, subnormals at emin
    logic [P_DST-1:0] man;   // hidden bit at the MSB
    logic             zero;
    logic             inf;
    logic             nan;
    logic             snan;
  } unpacked_t;

  typedef struct packed {
    logic             sign;
    int               exp;   // weight of man's MSB is 2^exp
    logic [P_DST-1:0] man;
    logic             inf;
  } addend_t;

  typedef struct packed {
    logic [DST_WIDTH-1:0] result;
    status_t              status;
    logic [TAG_WIDTH-1:0] tag;
  } pipe_t;

  function automatic unpacked_t unpack(logic [DST_WIDTH-1:0] v, fp_format_e f);
    unpacked_t            u;
    int unsigned          eb, mb;
    logic [DST_WIDTH-1:0] ef, mf, emask, mmask;
    logic [P_DST-1:0]     sig;
    eb    = exp_bits(f);
    mb    = man_bits(f);
    emask = DST_WIDTH'((64'd1 << eb) - 64'd1);
    mmask = DST_WIDTH'((64'd1 << mb) - 64'd1);
    ef    = (v >> mb) & emask;
    mf    = v & mmask;
    u.sign = v[eb+mb];
    u.zero = (ef == '0) && (mf == '0);
    u.inf  = (ef == emask) && (mf == '0);
    u.nan  = (ef == emask) && (mf != '0);
    u.snan = u.nan && !mf[mb-1];
    u.exp  = (ef == '0) ? 1 - fmt_bias(f) : int'(ef) - fmt_bias(f);
    sig    = P_DST'(mf) | ((ef != '0) ? (P_DST'(1) << mb) : '0);
    u.man  = sig << (P_DST - 1 - mb);
    return u;
  endfunction

  // |x| < |y|, comparing the normalized values; zero is the smallest.
  function automatic logic mag_less(addend_t x, addend_t y);
    int unsigned lx, ly;
    int          nx, ny;
    lx = P_DST;
    ly = P_DST;
    for (int i = 0; i < int'(P_DST); i++) begin
      if (x.man[i]) lx = P_DST - 1 - i;
      if (y.man[i]) ly = P_DST - 1 - i;
    end
    nx = x.exp - int'(lx);
    ny = y.exp - int'(ly);
    if (y.man == '0) return 1'b0;
    if (x.man == '0) return 1'b1;
    if (nx != ny)    return nx < ny;
    return (x.man << lx) < (y.man << ly);
  endfunction

  function automatic int unsigned lzc(logic [WF-1:0] x);
    int unsigned n;
    logic        found;
    n     = WF;
    found = 1'b0;
    for (int i = WF - 1; i >= 0; i--) begin
      if (x[i] && !found) begin
        n     = WF - 1 - i;
        found = 1'b1;
      end
    end
    return n;
  endfunction

  // -------------------------------------------------------------------------
  // Combinational datapath
  // -------------------------------------------------------------------------
  logic [DST_WIDTH-1:0] comb_result;
  status_t              comb_status;

  // Datapath signals
  unpacked_t               ua, ub, uc, ud, ue;
  addend_t                 ad [3];
  logic                    beats [3][3];
  logic [31:0]             rank [3];
  logic [1:0]              imax, iint, imin;
  logic [2*P_SRC-1:0]      prod_ab, prod_cd;
  logic                    is_vsum, nan_in, invalid, any_inf, inf_sign, inf_pos, inf_neg;
  logic                    all_zero;
  logic signed [31:0]      d_int, d_min, d_im;
  logic                    int_min_cancel;
  logic [WA-1:0]           max_ext, int_ext, int_sh;
  logic [WM-1:0]           min_ext, min_sh;
  logic signed [WS:0]      sum;
  logic signed [WF:0]      sum_pad, fin;
  logic [WF-1:0]           x, y, rmask;
  logic                    first_zero, sign, st_extra, guard, sticky, lsb, rup;
  logic signed [31:0]      eref, elead, emin, eres, shl, bias, biased, maxexp;
  logic [31:0]             lz, p, eb, mb, rsh;
  logic [DST_WIDTH-1:0]    mant, packed_r, frac_mask;
  logic                    is_norm, ovf;


  always_comb begin : datapath
    rsh     = 0;
    is_vsum = (op_i == VSUM);
    eb      = exp_bits(dst_fmt_i);
    mb      = man_bits(dst_fmt_i);
    p       = mb + 1;
    bias    = fmt_bias(dst_fmt_i);
    emin    = 1 - bias;
    maxexp  = (1 << eb) - 1;

    ua = unpack(operand_a_i, src_fmt_i);
    uc = unpack(operand_c_i, src_fmt_i);
    ub = unpack(DST_WIDTH'(operand_b_i), src_fmt_i);
    ud = unpack(DST_WIDTH'(operand_d_i), src_fmt_i);
    ue = unpack(operand_e_i, dst_fmt_i);
    if (op_i != EXSDOTP) begin
      // ExVsum: b = d = 1.0. For Vsum the multipliers are bypassed anyway.
      ub = '{sign: 1'b0, exp: 0, man: {1'b1, {(P_DST-1){1'b0}}},
             zero: 1'b0, inf: 1'b0, nan: 1'b0, snan: 1'b0};
      ud = ub;
    end

    // Mantissa multipliers: (2*P_SRC)-bit products, padded to P_DST bits.
    prod_ab = ua.man[P_DST-1 -: P_SRC] * ub.man[P_DST-1 -: P_SRC];
    prod_cd = uc.man[P_DST-1 -: P_SRC] * ud.man[P_DST-1 -: P_SRC];

    // is_vsum muxes
    ad[0].sign = ua.sign ^ ub.sign;
    ad[1].sign = uc.sign ^ ud.sign;
    ad[2].sign = ue.sign;
    if (is_vsum) begin
      ad[0].exp = ua.exp;
      ad[0].man = ua.man;
      ad[1].exp = uc.exp;
      ad[1].man = uc.man;
    end else begin
      // A product has two integer bits; its exponent is counted from the upper one.
      ad[0].exp = ua.exp + ub.exp + 1;
      ad[0].man = {prod_ab, {(P_DST-2*P_SRC){1'b0}}};
      ad[1].exp = uc.exp + ud.exp + 1;
      ad[1].man = {prod_cd, {(P_DST-2*P_SRC){1'b0}}};
    end
    ad[2].exp = ue.exp;
    ad[2].man = ue.man;
    ad[0].inf = ua.inf | ub.inf;
    ad[1].inf = uc.inf | ud.inf;
    ad[2].inf = ue.inf;

    // Special cases
    nan_in  = ua.nan | ub.nan | uc.nan | ud.nan | ue.nan;
    invalid = ua.snan | ub.snan | uc.snan | ud.snan | ue.snan
            | (ua.inf & ub.zero) | (ua.zero & ub.inf)
            | (uc.inf & ud.zero) | (uc.zero & ud.inf);
    inf_pos = 1'b0;
    inf_neg = 1'b0;
    for (int i = 0; i < 3; i++) begin
      if (ad[i].inf) begin
        if (ad[i].sign) inf_neg = 1'b1;
        else            inf_pos = 1'b1;
      end
    end
    invalid  = invalid | (inf_pos & inf_neg);
    any_inf  = inf_pos | inf_neg;
    inf_sign = inf_neg;
    all_zero = (ad[0].man == '0) && (ad[1].man == '0) && (ad[2].man == '0);

    // Three-addend sorting: strict total order, zero addends last, ties by index.
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        beats[i][j] = 1'b0;
      end
    end
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        if (i != j) begin
          if (ad[i].man == '0 && ad[j].man == '0) beats[i][j] = (i < j);
          else if (ad[i].man == '0) beats[i][j] = 1'b0;
          else if (ad[j].man == '0) beats[i][j] = 1'b1;
          else if (ad[i].exp != ad[j].exp) beats[i][j] = (ad[i].exp > ad[j].exp);
          else if (ad[i].man != ad[j].man) beats[i][j] = (ad[i].man > ad[j].man);
          else                             beats[i][j] = (i < j);
        end
      end
    end
    imax = 0;
    iint = 1;
    imin = 2;
    for (int i = 0; i < 3; i++) begin
      rank[i] = 0;
      for (int j = 0; j < 3; j++) begin
        if (beats[j][i]) rank[i] = rank[i] + 1;
      end
      if (rank[i] == 0) imax = 2'(i);
      if (rank[i] == 1) iint = 2'(i);
      if (rank[i] == 2) imin = 2'(i);
    end
    // The two smaller addends are ordered by their true magnitude (a product
    // of a subnormal can carry a large exponent with leading zero bits), so
    // that the sticky tail of int always dominates that of min.
    if (mag_less(ad[iint], ad[imin])) begin
      {iint, imin} = {imin, iint};
    end

    // Exponent differences (clamped: a fully shifted-out addend is pure sticky)
    d_int = ad[imax].exp - ad[iint].exp;
    d_min = ad[imax].exp - ad[imin].exp;
    if (d_int < 0)      d_int = 0;
    if (d_int > WA + 1) d_int = WA + 1;
    if (d_min < 0)      d_min = 0;
    if (d_min > WM + 1) d_min = WM + 1;

    // int and min of equal magnitude and opposite sign cancel exactly; their
    // separate sticky bits would otherwise leave a spurious inexact tail.
    d_im = ad[iint].exp - ad[imin].exp;
    int_min_cancel = (ad[iint].sign != ad[imin].sign) && (ad[imin].man != '0) && (d_im >= 0)
                   && (d_im <= int'(P_DST))
                   && (({{P_DST{1'b0}}, ad[iint].man} << d_im) == {{P_DST{1'b0}}, ad[imin].man});

    // First addition: max + int on 2*P_DST+3 bits
    max_ext = {ad[imax].man, {(P_DST+3){1'b0}}};
    int_ext = {ad[iint].man, {(P_DST+3){1'b0}}};
    int_sh  = int_ext >> d_int;
    int_sh[0] = int_sh[0] | (|(int_ext & ~({WA{1'b1}} << d_int)));
    sum = (ad[imax].sign ? -$signed({2'b00, max_ext}) : $signed({2'b00, max_ext}))
        + (ad[iint].sign ? -$signed({2'b00, int_sh})  : $signed({2'b00, int_sh}));
    first_zero = (sum == '0);

    // Second addition: padded sum + min on 2*P_DST+P_SRC+5 bits
    min_ext = {ad[imin].man, {(P_DST+P_SRC+3){1'b0}}};
    min_sh  = min_ext >> d_min;
    min_sh[0] = min_sh[0] | (|(min_ext & ~({WM{1'b1}} << d_min)));
    sum_pad = $signed({{(WF-WS){sum[WS]}}, sum}) <<< P_SRC;
    fin = sum_pad + (ad[imin].sign ? -$signed({3'b000, min_sh}) : $signed({3'b000, min_sh}));

    // is_first_sum_exact_zero mux
    if (int_min_cancel) begin
      x    = {2'b00, ad[imax].man, {(P_DST+P_SRC+3){1'b0}}};
      eref = ad[imax].exp;
      sign = ad[imax].sign;
    end else if (first_zero) begin
      x    = {2'b00, min_ext};
      eref = ad[imin].exp;
      sign = ad[imin].sign;
    end else begin
      x    = fin[WF] ? WF'(-fin) : WF'(fin);
      eref = ad[imax].exp;
      sign = fin[WF];
    end

    // Normalization: x[WF-1] has weight 2^(eref+2)
    lz    = lzc(x);
    elead = eref + 2 - int'(lz);
    if (elead >= emin) begin
      shl  = int'(lz);
      eres = elead;
    end else begin
      shl  = int'(lz) - (emin - elead);
      eres = emin;
    end
    st_extra = 1'b0;
    if (shl >= 0) begin
      y = x << shl;
    end else begin
      rsh = unsigned'(-shl);
      if (rsh > WF) rsh = WF;
      y = x >> rsh;
      st_extra = |(x & ~({WF{1'b1}} << rsh));
    end

    // Rounding at the destination format's precision p
    mant   = DST_WIDTH'(y >> (WF - p));
    guard  = y[WF-p-1];
    rmask  = {WF{1'b1}} >> (p + 1);
    sticky = (|(y & rmask)) | st_extra;
    lsb    = mant[0];
    case (rnd_mode_i)
      RNE:     rup = guard & (sticky | lsb);
      RTZ:     rup = 1'b0;
      RDN:     rup = (guard | sticky) & sign;
      RUP:     rup = (guard | sticky) & ~sign;
      RMM:     rup = guard;
      default: rup = guard & (sticky | lsb);
    endcase
    is_norm   = mant[p-1];
    biased    = is_norm ? eres + bias : 0;
    frac_mask = DST_WIDTH'((64'd1 << mb) - 64'd1);
    packed_r  = (DST_WIDTH'(biased) << mb) | (mant & frac_mask);
    ovf       = (biased >= maxexp);
    packed_r  = packed_r + DST_WIDTH'(rup);
    if ((packed_r >> mb) >= DST_WIDTH'(maxexp)) ovf = 1'b1;

    comb_status = '0;
    if (nan_in || invalid) begin
      comb_result    = (DST_WIDTH'(maxexp) << mb) | (DST_WIDTH'(1) << (mb - 1));
      comb_status.nv = invalid;
    end else if (any_inf) begin
      comb_result = (DST_WIDTH'(inf_sign) << (eb + mb)) | (DST_WIDTH'(maxexp) << mb);
    end else if (x == '0) begin
      // Exact zero: sum of zeros keeps their common sign, cancellation gives +0 (-0 in RDN)
      if (all_zero) begin
        sign = (rnd_mode_i == RDN) ? (ad[0].sign | ad[1].sign | ad[2].sign)
                                   : (ad[0].sign & ad[1].sign & ad[2].sign);
      end else begin
        sign = (rnd_mode_i == RDN);
      end
      comb_result = DST_WIDTH'(sign) << (eb + mb);
    end else if (ovf) begin
      comb_status.of = 1'b1;
      comb_status.nx = 1'b1;
      if ((rnd_mode_i == RTZ) || (rnd_mode_i == RDN && !sign) || (rnd_mode_i == RUP && sign)) begin
        // Largest finite number
        comb_result = (DST_WIDTH'(sign) << (eb + mb)) | (DST_WIDTH'(maxexp - 1) << mb) | frac_mask;
      end else begin
        comb_result = (DST_WIDTH'(sign) << (eb + mb)) | (DST_WIDTH'(maxexp) << mb);
      end
    end else begin
      comb_result    = (DST_WIDTH'(sign) << (eb + mb)) | packed_r;
      comb_status.nx = guard | sticky;
      comb_status.uf = (guard | sticky) & ~is_norm;
    end
  end

  // -------------------------------------------------------------------------
  // Output pipeline: NUM_PIPE_REGS stages with valid/ready handshake
  // -------------------------------------------------------------------------
  pipe_t comb_data;
  assign comb_data = '{result: comb_result, status: comb_status, tag: tag_i};

  if (NUM_PIPE_REGS == 0) begin : gen_comb
    assign result_o    = comb_data.result;
    assign status_o    = comb_data.status;
    assign tag_o       = comb_data.tag;
    assign out_valid_o = in_valid_i;
    assign in_ready_o  = out_ready_i;
  end else begin : gen_pipe
    pipe_t data_q  [NUM_PIPE_REGS];
    logic  valid_q [NUM_PIPE_REGS];
    logic  ready   [NUM_PIPE_REGS+1];
    logic  stage_valid_in [NUM_PIPE_REGS];
    pipe_t stage_data_in  [NUM_PIPE_REGS];

    assign stage_valid_in[0] = in_valid_i;
    assign stage_data_in[0]  = comb_data;
    for (genvar s = 1; s < NUM_PIPE_REGS; s++) begin : gen_link
      assign stage_valid_in[s] = valid_q[s-1];
      assign stage_data_in[s]  = data_q[s-1];
    end

    assign ready[NUM_PIPE_REGS] = out_ready_i;
    for (genvar s = 0; s < NUM_PIPE_REGS; s++) begin : gen_stage
      // A stage can take new data when it is empty or its content moves on.
      assign ready[s] = ~valid_q[s] | ready[s+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          valid_q[s] <= 1'b0;
          data_q[s]  <= '0;
        end else if (ready[s]) begin
          valid_q[s] <= stage_valid_in[s];
          if (stage_valid_in[s]) data_q[s] <= stage_data_in[s];
        end
      end
    end
    assign in_ready_o  = ready[0];
    assign result_o    = data_q[NUM_PIPE_REGS-1].result;
    assign status_o    = data_q[NUM_PIPE_REGS-1].status;
    assign tag_o       = data_q[NUM_PIPE_REGS-1].tag;
    assign out_valid_o = valid_q[NUM_PIPE_REGS-1];
  end

endmodule
