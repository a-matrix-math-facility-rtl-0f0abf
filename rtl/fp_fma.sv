// fp_fma: IEEE-754 binary fused multiply-add, r = a*b + c, one rounding.
//
// This is the floating-point multiply-add of a processing-unit ALU. One
// instance with EXP_W=11, MAN_W=52 is the fp64 multiply-add; instances with
// EXP_W=8, MAN_W=23 are the fp32 multiply-adds (fp16 and bfloat16 inputs are
// widened to fp32 exactly before they get here). The paper states how many
// multiply-adds each ALU performs per cycle, not how they are built; the
// structure below is this design's own.
//
// How it works: the exact product of the two significands is placed in a wide
// window; the addend is placed beside it at its true offset. If the addend lies
// far above the product, it is clamped to sit three bits above the product's
// top bit (the product then only acts as guard/round/sticky information); if it
// lies far below, its low bits fold into a sticky bit at window bit 0. The
// magnitudes are added or subtracted exactly, the leading one is found, and the
// result is rounded to nearest-even at the position set either by the leading
// one or, for tiny results, by the subnormal limit. Subnormal inputs and outputs
// are handled; overflow gives infinity. Every NaN result is the default quiet
// NaN (exponent all ones, top fraction bit set) - an own choice, NaN payloads
// are not propagated. Only round-to-nearest-even is provided and no exception
// flags are produced.
//
// Timing: purely combinational.
module fp_fma #(
  parameter int unsigned EXP_W = 11,
  parameter int unsigned MAN_W = 52
) (
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  input  logic [EXP_W+MAN_W:0] c,
  output logic [EXP_W+MAN_W:0] r
);
  localparam int MW   = int'(MAN_W);      // signed copy for exponent arithmetic
  localparam int N    = EXP_W + MAN_W + 1;
  localparam int P    = MAN_W + 1;          // significand precision
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int OFF  = P + 4;              // product LSB position in the window
  localparam int PMAX = OFF + 2*P + 3;      // highest addend LSB position
  localparam int W    = PMAX + P + 2;       // window width (one spare carry bit)
  localparam int EMAX = (1 << EXP_W) - 1;

  typedef logic [W-1:0] win_t;

  logic          sa, sb, sc, sp;
  logic [EXP_W-1:0] ea, eb, ec;
  logic [MAN_W-1:0] fa, fb, fc;
  logic          a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
  logic [P-1:0]  ma, mb, mc;
  logic [2*P-1:0] mp;
  int            lp, lc, posw, lw, sh, msb, lsb_idx, lsb_exp, biased;
  win_t          pw, cw, s;
  logic          c_stk, eff_sub, sgn, g, stk, inc;
  logic [P:0]    kept, rounded;
  logic [N-1:0]  qnan, general;

  assign {sa, ea, fa} = a;
  assign {sb, eb, fb} = b;
  assign {sc, ec, fc} = c;

  always_comb begin
    qnan = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    a_zero = (ea == '0) && (fa == '0);
    b_zero = (eb == '0) && (fb == '0);
    c_zero = (ec == '0) && (fc == '0);
    a_inf  = (ea == '1) && (fa == '0);
    b_inf  = (eb == '1) && (fb == '0);
    c_inf  = (ec == '1) && (fc == '0);
    a_nan  = (ea == '1) && (fa != '0);
    b_nan  = (eb == '1) && (fb != '0);
    c_nan  = (ec == '1) && (fc != '0);
    sp = sa ^ sb;

    // significands with hidden bit; subnormals use exponent 1
    ma = {ea != '0, fa};
    mb = {eb != '0, fb};
    mc = {ec != '0, fc};
    mp = ma * mb;
    lp = ((ea == '0) ? 1 : int'(ea)) + ((eb == '0) ? 1 : int'(eb)) - 2*BIAS - 2*MW;
    lc = ((ec == '0) ? 1 : int'(ec)) - BIAS - MW;

    // place the product and the addend in the window
    pw    = win_t'(mp) << OFF;
    posw  = lc - lp + OFF;
    c_stk = 1'b0;
    lw    = lp - OFF;
    sh    = 0;
    if (posw > PMAX) begin
      cw = win_t'(mc) << PMAX;
      lw = lc - PMAX;
    end else if (posw >= 1) begin
      cw = win_t'(mc) << posw;
    end else begin
      sh = 1 - posw;
      if (sh > P) sh = P + 1;
      cw    = (win_t'(mc) >> sh) << 1;
      c_stk = (sh > P) ? (mc != '0) : ((mc & ((P'(1) << sh) - P'(1))) != '0);
      cw[0] = c_stk;
    end

    // exact signed sum of magnitudes
    eff_sub = sp ^ sc;
    if (!eff_sub) begin
      s   = pw + cw;
      sgn = sp;
    end else if (pw >= cw) begin
      s   = pw - cw;
      sgn = sp;
    end else begin
      s   = cw - pw;
      sgn = sc;
    end

    // leading one
    msb = 0;
    for (int i = 0; i < W; i++) if (s[i]) msb = i;

    // rounding position: normalised, or fixed by the subnormal limit
    lsb_idx = msb - MW;
    if ((1 - BIAS - MW) - lw > lsb_idx) lsb_idx = (1 - BIAS - MW) - lw;

    g = 1'b0; stk = 1'b0;
    if (lsb_idx <= 0) begin
      kept = (P+1)'(s << (-lsb_idx));
    end else begin
      kept = (lsb_idx >= W) ? '0 : (P+1)'(s >> lsb_idx);
      g    = (lsb_idx - 1 < W) ? s[lsb_idx-1] : 1'b0;
      if (lsb_idx - 1 >= W) stk = (s != '0);
      else if (lsb_idx > 1) stk = ((s << (W - (lsb_idx - 1))) != '0);
    end
    inc     = g & (stk | kept[0]);
    rounded = kept + (P+1)'(inc);
    lsb_exp = lw + lsb_idx;
    if (rounded[P]) begin
      rounded = rounded >> 1;
      lsb_exp = lsb_exp + 1;
    end
    biased = rounded[MAN_W] ? (lsb_exp + MW + BIAS) : 0;
    if (biased >= EMAX)
      general = {sgn, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (rounded == '0)
      general = '0;                              // exact cancellation: +0
    else
      general = {sgn, EXP_W'(biased), rounded[MAN_W-1:0]};

    // special operands
    if (a_nan || b_nan || c_nan)                       r = qnan;
    else if ((a_inf && b_zero) || (b_inf && a_zero))   r = qnan;
    else if ((a_inf || b_inf) && c_inf && (sp != sc))  r = qnan;
    else if (a_inf || b_inf)                           r = {sp, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (c_inf)                                    r = c;
    else if (a_zero || b_zero) begin
      if (c_zero) r = {sp & sc, {(N-1){1'b0}}};
      else        r = c;
    end else                                           r = general;
  end

endmodule
