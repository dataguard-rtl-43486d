// fp32_fma: combinational IEEE-754 single-precision fused multiply-add.
//
// r = a*b + c with a single rounding, round-to-nearest-even. The exact
// 48-bit product and the addend are aligned on a common exponent in a 52-bit
// window (three guard positions plus a sticky bit), added or subtracted,
// normalised with a leading-zero count and rounded once. Subnormal inputs
// are read as zero and results below the normal range are flushed to zero;
// NaN results are the canonical quiet NaN. With b = 1.0 the unit is an
// exact-then-rounded FP adder, which is how the noise adders and the audit
// summation use it.
//
// The paper builds its units on HardFloat and pipelines them; it gives no
// internals. This datapath, the flush-to-zero choice and the NaN encoding
// are this design's own. Pipeline registers are placed by the users of this
// module. Interface: a, b, c, r are raw FP32 bit patterns; no clock.
module fp32_fma
  import dg_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  fp32_t c,
  output fp32_t r
);

  localparam int unsigned SW = 52;   // alignment window

  function automatic int unsigned lead_one(input logic [SW-1:0] v);
    int unsigned p;
    p = 0;
    for (int unsigned i = 0; i < SW; i++)
      if (v[i]) p = i;
    return p;
  endfunction

  logic        sa, sb, sc, sp;
  logic [7:0]  ea, eb, ec;
  logic        za, zb, zc, ia, ib, ic, na, nb, nc;
  logic [23:0] ma, mb, mc;
  logic [47:0] mp;

  always_comb begin
    sa = a[31]; sb = b[31]; sc = c[31];
    ea = a[30:23]; eb = b[30:23]; ec = c[30:23];
    za = (ea == 8'd0); zb = (eb == 8'd0); zc = (ec == 8'd0);
    ia = (ea == 8'hFF) && (a[22:0] == 23'd0);
    ib = (eb == 8'hFF) && (b[22:0] == 23'd0);
    ic = (ec == 8'hFF) && (c[22:0] == 23'd0);
    na = (ea == 8'hFF) && (a[22:0] != 23'd0);
    nb = (eb == 8'hFF) && (b[22:0] != 23'd0);
    nc = (ec == 8'hFF) && (c[22:0] != 23'd0);
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    mc = {1'b1, c[22:0]};
    sp = sa ^ sb;
    mp = ma * mb;
  end

  // Finite, non-zero path.
  logic signed [11:0] xp, xc, xbig, e_res, xdiff;
  logic [SW-1:0]      vp, vc, vbig, vsml, sum, norm, lost_mask, swap_t;
  logic               sbig, eff_sub, p_is_big, guard, sticky, lsb;
  int unsigned        d, lp;
  logic [24:0]        mant;

  always_comb begin
    lost_mask = '0;
    swap_t    = '0;
    xp = 12'(signed'({4'd0, ea})) + 12'(signed'({4'd0, eb})) - 12'sd127;
    xc = 12'(signed'({4'd0, ec}));
    // Both operands as 52-bit integers scaled by 2^(x - 176):
    // product 48 bits shifted up by 3, addend 24 bits shifted up by 26.
    vp = {1'b0, mp, 3'b000};
    vc = {2'b00, mc, 26'd0};
    if (zc) p_is_big = 1'b1;
    else if (xp != xc) p_is_big = (xp > xc);
    else p_is_big = (vp >= vc);
    xbig = p_is_big ? xp : xc;
    xdiff = p_is_big ? (xp - xc) : (xc - xp);
    d    = int'(unsigned'(20'(xdiff)));
    if (zc) d = SW;
    vbig = p_is_big ? vp : vc;
    vsml = p_is_big ? vc : vp;
    // right-align the smaller operand, keeping a sticky bit
    if (d >= SW) begin
      vsml = {{(SW-1){1'b0}}, (vsml != '0) && !zc};
    end else if (d > 0) begin
      lost_mask = (SW'(1) << d) - SW'(1);
      vsml = (vsml >> d) | {{(SW-1){1'b0}}, |(vsml & lost_mask)};
    end
    // swap when the aligned smaller one turned out larger (equal exponents)
    if (vsml > vbig) begin
      swap_t = vbig; vbig = vsml; vsml = swap_t;
      p_is_big = !p_is_big;
    end
    sbig    = p_is_big ? sp : sc;
    eff_sub = (sp != sc) && !zc;
    sum     = eff_sub ? (vbig - vsml) : (vbig + vsml);
    lp      = lead_one(sum);
    norm    = sum << (SW - 1 - lp);
    // value = sum * 2^(xbig-176); leading one at lp -> biased exp xbig+lp-49
    e_res   = xbig + 12'(signed'(lp)) - 12'sd49;
    guard   = norm[SW-25];
    sticky  = |norm[SW-26:0];
    lsb     = norm[SW-24];
    mant    = {1'b0, norm[SW-1:SW-24]} + {24'd0, guard & (sticky | lsb)};
    if (mant[24]) begin
      mant  = mant >> 1;
      e_res = e_res + 12'sd1;
    end
  end

  always_comb begin
    if (na || nb || nc || ((ia || ib) && (za || zb)) ||
        ((ia || ib) && ic && (sp != sc))) begin
      r = FP_QNAN;
    end else if (ia || ib) begin
      r = {sp, 8'hFF, 23'd0};
    end else if (ic) begin
      r = {sc, 8'hFF, 23'd0};
    end else if (za || zb) begin
      // product is zero: result is c (flushed), -0 only for -0 + -0
      r = zc ? {sp & sc, 31'd0} : c;
    end else if (sum == '0) begin
      r = 32'd0;                           // exact cancellation -> +0
    end else if (e_res >= 12'sd255) begin
      r = {sbig, 8'hFF, 23'd0};
    end else if (e_res <= 12'sd0) begin
      r = {sbig, 31'd0};                   // flush to zero
    end else begin
      r = {sbig, e_res[7:0], mant[22:0]};
    end
  end

endmodule
