// fp16_mac -- combinational FP16 fused multiply-add: y = c + a * b.
//
// This is the arithmetic core of every Axon PE. The paper builds its FP16 MAC
// from a simplified floating-point unit; this design writes its own, kept as
// simple as can be made exact: the product and the addend are both placed,
// exactly, on one fixed-point grid whose LSB is 2^-48 (the smallest product
// of two normal FP16 numbers has its LSB there, and the largest magnitude is
// below 2^33), they are added as integers, and the sum is normalised and
// rounded once, to nearest with ties to even. The result therefore equals the
// exactly rounded value of c + a*b.
//
// Simplifications, all this design's own choice:
//   * subnormal inputs are read as zero and results below 2^-14 flush to
//     +0 (flush-to-zero), as the exponent check is made before rounding;
//   * an exact zero sum is +0;
//   * NaN in, 0 * Inf or Inf - Inf give the quiet NaN 16'h7E00; otherwise an
//     Inf operand gives a signed Inf, and overflow after rounding gives Inf.
//
// Interface: a, b, c in, y out; purely combinational, the PE registers y.
module fp16_mac
  import axon_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  input  fp16_t c,
  output fp16_t y
);

  localparam int unsigned GW = 82;   // magnitude width of the fixed-point grid

  logic        sa, sb, sc, sp;
  logic [4:0]  ea, eb, ec;
  logic [10:0] ma, mb, mc;
  logic        a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
  logic        a_zero, b_zero, c_zero;

  logic [GW-1:0]   pmag, cmag, mag;
  logic signed [GW+1:0] psig, csig, sum;
  logic [6:0]      msb;
  logic [GW-1:0]   norm;
  logic [10:0]     mant;
  logic            guard, sticky, rnd;
  logic [11:0]     mant_r;   // bit 10 is the hidden one, not stored
  logic signed [8:0] exp_r;
  fp16_t           y_fin;

  always_comb begin
    {sa, ea} = {a[15], a[14:10]};
    {sb, eb} = {b[15], b[14:10]};
    {sc, ec} = {c[15], c[14:10]};
    a_zero = (ea == 5'd0);
    b_zero = (eb == 5'd0);
    c_zero = (ec == 5'd0);
    a_inf  = (ea == 5'd31) && (a[9:0] == '0);
    b_inf  = (eb == 5'd31) && (b[9:0] == '0);
    c_inf  = (ec == 5'd31) && (c[9:0] == '0);
    a_nan  = (ea == 5'd31) && (a[9:0] != '0);
    b_nan  = (eb == 5'd31) && (b[9:0] != '0);
    c_nan  = (ec == 5'd31) && (c[9:0] != '0);
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    mc = {1'b1, c[9:0]};
    sp = sa ^ sb;

    // Exact placement on the 2^-48 grid.
    pmag = '0;
    if (!a_zero && !b_zero && !a_inf && !b_inf && !a_nan && !b_nan)
      pmag = (GW'(ma) * GW'(mb)) << (ea + eb - 6'd2);
    cmag = '0;
    if (!c_zero && !c_inf && !c_nan)
      cmag = GW'(mc) << (ec + 6'd23);

    psig = sp ? -$signed({2'b00, pmag}) : $signed({2'b00, pmag});
    csig = sc ? -$signed({2'b00, cmag}) : $signed({2'b00, cmag});
    sum  = psig + csig;
    mag  = sum[GW+1] ? GW'(-sum) : GW'(sum);

    msb = '0;
    for (int i = 0; i < GW; i++)
      if (mag[i]) msb = 7'(i);

    norm   = mag << (7'(GW - 1) - msb);
    mant   = norm[GW-1 -: 11];
    guard  = norm[GW-12];
    sticky = |norm[GW-13:0];
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 12'(rnd);
    exp_r  = $signed({2'b00, msb}) - 9'sd33 + (mant_r[11] ? 9'sd1 : 9'sd0);

    if (mag == '0 || exp_r < 9'sd1 || msb < 7'd34)
      y_fin = 16'h0000;
    else if (exp_r > 9'sd30)
      y_fin = {sum[GW+1], 5'd31, 10'd0};
    else
      y_fin = {sum[GW+1], exp_r[4:0], mant_r[11] ? 10'd0 : mant_r[9:0]};

    // Special operands.
    if (a_nan || b_nan || c_nan || (a_inf && b_zero) || (b_inf && a_zero) ||
        ((a_inf || b_inf) && c_inf && (sp != sc)))
      y = FP16_QNAN;
    else if (a_inf || b_inf)
      y = {sp, 5'd31, 10'd0};
    else if (c_inf)
      y = c;
    else
      y = y_fin;
  end

endmodule
