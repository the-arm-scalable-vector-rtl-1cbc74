// IEEE 754 double-precision fused multiply-add: r = round(a * b + c).
//
// The product a*b is formed exactly (106 bits) and added to c in a 168-bit
// fixed-point window anchored at the larger of the two terms; bits of the
// smaller term that fall below the window are kept as a sticky bit jammed
// into the window's least significant bit.  The sum is normalised, rounded
// once to nearest-even (so the multiply-add is fused) and packed, with
// gradual underflow to subnormals and overflow to infinity.  A NaN operand,
// inf x 0 or inf - inf gives the default quiet NaN; an exact zero sum takes
// the sign of the terms when they agree and +0 otherwise.  No exception
// flags are produced.  The rounding mode is fixed to nearest-even.
//
// The paper uses fmla on doubles in its daxpy example and names the ordered
// reduction fadda; it does not describe the FP arithmetic, which here
// follows IEEE 754.  Combinational.  Lint reports the upper bits of the
// normalised window m as unused: only its low 53 bits form the significand,
// the rest are zero by construction after normalisation.
module sve_fma64 (
  input  logic [63:0] a,
  input  logic [63:0] b,
  input  logic [63:0] c,
  output logic [63:0] r
);

  localparam int WW = 168;
  localparam logic [63:0] QNAN = 64'h7ff8_0000_0000_0000;

  logic        sa, sb, sc, sp;
  logic [10:0] xa, xb, xc;
  logic [52:0] ma, mb, mc;
  logic        nan_a, nan_b, nan_c, inf_a, inf_b, inf_c, zero_a, zero_b;
  logic [105:0] prod;

  assign sa = a[63]; assign xa = a[62:52];
  assign sb = b[63]; assign xb = b[62:52];
  assign sc = c[63]; assign xc = c[62:52];
  assign ma = {xa != 0, a[51:0]};
  assign mb = {xb != 0, b[51:0]};
  assign mc = {xc != 0, c[51:0]};
  assign sp = sa ^ sb;
  assign nan_a = (xa == 11'h7ff) && (a[51:0] != 0);
  assign nan_b = (xb == 11'h7ff) && (b[51:0] != 0);
  assign nan_c = (xc == 11'h7ff) && (c[51:0] != 0);
  assign inf_a = (xa == 11'h7ff) && (a[51:0] == 0);
  assign inf_b = (xb == 11'h7ff) && (b[51:0] == 0);
  assign inf_c = (xc == 11'h7ff) && (c[51:0] == 0);
  assign zero_a = (a[62:0] == 0);
  assign zero_b = (b[62:0] == 0);
  assign prod = ma * mb;

  // shift m right by sh with the lost bits jammed into bit 0
  function automatic logic [WW-1:0] shr_jam(logic [WW-1:0] m, int sh);
    logic [WW-1:0] o, lost;
    if (sh <= 0) return m;
    if (sh >= WW) return {{(WW-1){1'b0}}, |m};
    o    = m >> sh;
    lost = m & ((WW'(1) << sh) - WW'(1));
    o[0] = o[0] | (|lost);
    return o;
  endfunction

  always_comb begin
    int ea, eb, ec, s_p, s_c, top, base, sh_p, sh_c, msb, e, sh;
    logic [WW-1:0] vp, vc, sum, m;
    logic          ssum, guard, sticky, rnd;
    logic [53:0]   mr;
    ea = (xa == 0) ? 1 : int'(xa);
    eb = (xb == 0) ? 1 : int'(xb);
    ec = (xc == 0) ? 1 : int'(xc);
    s_p = ea + eb - 2150;          // value of the product = prod x 2^s_p
    s_c = ec - 1075;               // value of c = mc x 2^s_c
    if (prod == 0)                 top = s_c + 53;
    else if (mc == 0)              top = s_p + 106;
    else                           top = (s_p + 106 > s_c + 53) ? s_p + 106 : s_c + 53;
    base = top - (WW - 2);
    sh_p = s_p - base;
    sh_c = s_c - base;
    vp = (sh_p >= 0) ? (WW'(prod) << sh_p) : shr_jam(WW'(prod), -sh_p);
    vc = (sh_c >= 0) ? (WW'(mc) << sh_c)   : shr_jam(WW'(mc), -sh_c);
    if (sp == sc) begin
      sum = vp + vc; ssum = sp;
    end else if (vp >= vc) begin
      sum = vp - vc; ssum = sp;
    end else begin
      sum = vc - vp; ssum = sc;
    end
    msb = 0;
    for (int i = 0; i < WW; i++) if (sum[i]) msb = i;
    e  = msb + base + 1023;        // biased exponent if normal
    sh = msb - 52 + ((e < 1) ? (1 - e) : 0);
    guard = 1'b0; sticky = 1'b0;
    if (sh <= 0) begin
      m = sum << (-sh);
    end else if (sh > WW) begin
      m = '0; sticky = |sum;
    end else begin
      m      = sum >> sh;
      guard  = sum[sh-1];
      sticky = |(sum & ((WW'(1) << (sh - 1)) - WW'(1)));
    end
    rnd = guard && (sticky || m[0]);
    mr  = 54'(m[52:0]) + 54'(rnd);
    if (e < 1) e = 0;              // subnormal (or rounds up into the smallest normal)
    if (mr[53]) begin              // rounding carried out of 53 bits
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e == 0 && mr[52]) e = 1;   // subnormal rounded up to normal

    if (nan_a || nan_b || nan_c || (inf_a && zero_b) || (inf_b && zero_a) ||
        ((inf_a || inf_b) && inf_c && (sp != sc)))
      r = QNAN;
    else if (inf_a || inf_b)
      r = {sp, 11'h7ff, 52'd0};
    else if (inf_c)
      r = {sc, 11'h7ff, 52'd0};
    else if (sum == 0)
      r = {(sp == sc) ? sp : 1'b0, 63'd0};
    else if (e >= 2047)
      r = {ssum, 11'h7ff, 52'd0};
    else
      r = {ssum, 11'(e), mr[51:0]};
  end

endmodule
