// Combinational IEEE 754 binary16 (FP16) fused multiply-add: r = a * b + c,
// rounded once, to nearest with ties to even.
//
// The product of the two 11-bit significands and the addend are placed,
// without any loss, on one 84-bit fixed-point grid whose LSB weighs 2^-48
// (the smallest possible product exponent); the signed sum is therefore exact
// and the single rounding at the end makes the operation fused.
// Simplifications, all this design's own: subnormal inputs are read as zero
// and results below the normal range are flushed to a signed zero; NaN inputs,
// inf*0 and inf-inf give the quiet NaN 0x7E00; an exact zero sum gives +0.
module fp16_fma (
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] r_o
);
  localparam int unsigned XW = 84;
  localparam logic [15:0] QNAN = 16'h7E00;

  logic        sa, sb, sc, sp;
  logic [4:0]  ea, eb, ec;
  logic [10:0] ma, mb, mc;
  logic        a_inf, b_inf, c_inf, a_nan, b_nan, c_nan, a_zero, b_zero;
  logic [21:0] prod;
  logic [XW-1:0] xp, xc, mag;
  logic        rs;
  logic [XW-1:0] norm;
  int          lead;
  logic [10:0] mant;  // 10 fraction bits plus carry
  logic        guard, sticky, rnd;
  int          e;

  always_comb begin
    sa = a_i[15]; sb = b_i[15]; sc = c_i[15];
    ea = a_i[14:10]; eb = b_i[14:10]; ec = c_i[14:10];
    ma = (ea == 0) ? 11'd0 : {1'b1, a_i[9:0]};
    mb = (eb == 0) ? 11'd0 : {1'b1, b_i[9:0]};
    mc = (ec == 0) ? 11'd0 : {1'b1, c_i[9:0]};
    a_inf = (ea == 5'h1f) && (a_i[9:0] == 0);  a_nan = (ea == 5'h1f) && (a_i[9:0] != 0);
    b_inf = (eb == 5'h1f) && (b_i[9:0] == 0);  b_nan = (eb == 5'h1f) && (b_i[9:0] != 0);
    c_inf = (ec == 5'h1f) && (c_i[9:0] == 0);  c_nan = (ec == 5'h1f) && (c_i[9:0] != 0);
    a_zero = (ea == 0); b_zero = (eb == 0);
    sp   = sa ^ sb;
    prod = ma * mb;
    // product weight 2^(ea+eb-50), addend weight 2^(ec-25); grid LSB 2^-48
    xp = (ea == 0 || eb == 0) ? '0 : (XW'(prod) << (int'(ea) + int'(eb) - 2));
    xc = (ec == 0) ? '0 : (XW'(mc) << (int'(ec) + 23));
    if (sp == sc) begin
      mag = xp + xc; rs = sp;
    end else if (xp >= xc) begin
      mag = xp - xc; rs = sp;
    end else begin
      mag = xc - xp; rs = sc;
    end
    lead = -1;
    for (int i = 0; i < XW; i++) if (mag[i]) lead = i;
    norm   = (lead >= 0) ? mag << (XW - 1 - lead) : '0;
    mant   = {1'b0, norm[XW-2 -: 10]};
    guard  = norm[XW-12];
    sticky = |norm[XW-13:0];
    rnd    = guard && (sticky || mant[0]);
    mant   = mant + 11'(rnd);
    // unbiased exponent lead-48, biased lead-33
    e = lead - 33 + (mant[10] ? 1 : 0);

    if (a_nan || b_nan || c_nan || (a_inf && b_zero) || (b_inf && a_zero) ||
        ((a_inf || b_inf) && c_inf && sp != sc))
      r_o = QNAN;
    else if (a_inf || b_inf)
      r_o = {sp, 5'h1f, 10'd0};
    else if (c_inf)
      r_o = {sc, 5'h1f, 10'd0};
    else if (lead < 0)
      r_o = 16'h0000;
    else if (e >= 31)
      r_o = {rs, 5'h1f, 10'd0};
    else if (e <= 0)
      r_o = {rs, 15'd0};
    else
      r_o = {rs, 5'(e), mant[9:0]};
  end
endmodule
