// fp32_fma: single-precision fused multiply-add, d = a*b + c, rounded once.
//
// Each PE holds two of these, one per 32-bit lane of an 8B memory beat. The paper
// names the unit (FPFMA) but not its insides; everything below is this design's
// choice. The 48-bit product and the 24-bit addend are placed in an 80-bit window
// aligned to the larger of the two; bits of the smaller operand shifted out of the
// window are OR-ed into the lowest bit (sticky), which keeps round-to-nearest-even
// exact because the window has more than two guard bits below the kept mantissa.
// The signed sum is normalised by a leading-one search and rounded to nearest,
// ties to even.
//
// Interface: purely combinational, a/b/c/d are IEEE-754 binary32.
// Simplifications: subnormal inputs are read as zero and subnormal results are
// flushed to a signed zero; any NaN input or invalid operation (Inf*0, Inf-Inf)
// returns the quiet NaN 0x7FC00000; overflow returns a signed infinity.
module fp32_fma (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] d
);
  localparam int W = 80;

  logic        sa, sb, sc, sp;
  logic [7:0]  ea, eb, ec;
  logic [23:0] ma, mb, mc;
  logic        a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
  logic [47:0] mp;

  // window placement
  int          tp, tc, t0, shp, shc;
  logic [2*W-1:0] pw, cw;
  logic [W-1:0]   pal, cal, mag_b, mag_s, sum;
  logic           p_st, c_st, s_big, s_small, p_is_big, rs;
  int             lead, eres;
  logic [W-1:0]   norm;
  logic [22:0]    frac;
  logic           rnd, stk;
  logic [23:0]    frac_r;

  always_comb begin
    sa = a[31]; sb = b[31]; sc = c[31];
    ea = a[30:23]; eb = b[30:23]; ec = c[30:23];
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0); c_zero = (ec == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    c_inf  = (ec == 8'hFF) && (c[22:0] == 23'd0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);
    c_nan  = (ec == 8'hFF) && (c[22:0] != 23'd0);
    ma = a_zero ? 24'd0 : {1'b1, a[22:0]};
    mb = b_zero ? 24'd0 : {1'b1, b[22:0]};
    mc = c_zero ? 24'd0 : {1'b1, c[22:0]};
    sp = sa ^ sb;
    mp = ma * mb;

    // weight (unbiased exponent) of product bit 47 and of addend bit 23
    tp = int'(ea) + int'(eb) - 253;
    tc = int'(ec) - 127;
    if (c_zero)                      t0 = tp;
    else if (a_zero || b_zero)       t0 = tc;
    else                             t0 = (tp > tc) ? tp : tc;
    shp = t0 - tp; if (shp > W) shp = W;
    shc = t0 - tc; if (shc > W) shc = W;

    // place both operands so the larger has its top bit at W-2
    pw = {{(W-48){1'b0}}, mp, {W{1'b0}}} << (W - 2 - 47);
    pw = pw >> shp;
    cw = {{(W-24){1'b0}}, mc, {W{1'b0}}} << (W - 2 - 23);
    cw = cw >> shc;
    p_st = |pw[W-1:0];
    c_st = |cw[W-1:0];
    pal = pw[2*W-1:W] | {{(W-1){1'b0}}, p_st};
    cal = cw[2*W-1:W] | {{(W-1){1'b0}}, c_st};
    if (a_zero || b_zero) pal = '0;
    if (c_zero)           cal = '0;

    // signed-magnitude add
    p_is_big = (pal >= cal);
    mag_b     = p_is_big ? pal : cal;
    mag_s   = p_is_big ? cal : pal;
    s_big   = p_is_big ? sp : sc;
    s_small = p_is_big ? sc : sp;
    sum = (s_big == s_small) ? (mag_b + mag_s) : (mag_b - mag_s);
    rs  = s_big;

    lead = -1;
    for (int i = 0; i < W; i++) if (sum[i]) lead = i;

    norm = '0; frac = '0; rnd = 1'b0; stk = 1'b0; frac_r = '0; eres = 0;
    if (lead >= 0) begin
      norm = sum << (W - 1 - lead);
      frac = norm[W-2 -: 23];
      rnd  = norm[W-25];
      stk  = |norm[W-26:0];
      eres = t0 - (W - 2) + lead + 127;
      frac_r = {1'b0, frac};
      if (rnd && (stk || frac[0])) frac_r = frac_r + 24'd1;
      if (frac_r[23]) eres = eres + 1;
    end

    // result selection
    if (a_nan || b_nan || c_nan ||
        ((a_inf || b_inf) && (a_zero || b_zero)) ||
        ((a_inf || b_inf) && c_inf && (sp != sc))) begin
      d = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      d = {sp, 8'hFF, 23'd0};
    end else if (c_inf) begin
      d = {sc, 8'hFF, 23'd0};
    end else if (lead < 0) begin
      // exact zero: -0 only when both terms are negative (round to nearest)
      d = {sp & sc, 31'd0};
    end else if (eres >= 255) begin
      d = {rs, 8'hFF, 23'd0};
    end else if (eres <= 0) begin
      d = {rs, 31'd0};
    end else begin
      d = {rs, eres[7:0], frac_r[22:0]};
    end
  end

endmodule
