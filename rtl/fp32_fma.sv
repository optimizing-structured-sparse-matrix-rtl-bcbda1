// fp32_fma: IEEE-754 binary32 fused multiply-add, y = a * b + c.
//
// One of these sits in every vector lane and performs the multiply and the
// accumulate of vfmacc and vindexmac. The 24x24-bit significand product is
// kept exact (48 bits); the addend is aligned to it with three guard bits
// and a sticky bit, the two are added or subtracted, the sum is normalised
// with a leading-one search and rounded once, to nearest with ties to even.
//
// Subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero. NaN inputs and invalid operations (inf * 0, inf - inf) give
// the canonical quiet NaN 0x7fc00000; overflow gives a signed infinity. An
// exact zero sum is +0. Fully combinational, no clock.
//
// The paper fixes only that the lanes compute on fp32 data and that
// vindexmac multiplies and accumulates; fusing the two steps (as the RISC-V
// vfmacc does), flush-to-zero and the single-cycle combinational form are
// this design's choices.
module fp32_fma (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        sa, sb, sc, sp;
  logic [7:0]  ea, eb, ec;
  logic [22:0] fa, fb, fc;
  logic        za, zb, zc, ia, ib, ic, na, nb, nc;
  logic [47:0] pm;
  logic [9:0]  ex, ey, big_e, dexp;
  logic [50:0] xw, yw, xs, ys;
  logic [51:0] s, n;
  logic        x_big, eff_sub, sgn;
  logic [5:0]  p;
  logic [24:0] mant_r;
  logic [23:0] mant;
  logic        g, st, rnd;
  logic signed [11:0] er;

  // Right shift that ORs everything shifted out into bit 0
  function automatic logic [50:0] shr_sticky(input logic [50:0] v, input logic [9:0] d);
    logic [50:0] r;
    logic        lost;
    if (d >= 10'd51) begin
      r = '0;
      lost = |v;
    end else begin
      r = v >> d;
      lost = |(v & ~({51{1'b1}} << d));
    end
    r[0] = r[0] | lost;
    return r;
  endfunction

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    {sc, ec, fc} = c;
    za = (ea == 8'd0);
    zb = (eb == 8'd0);
    zc = (ec == 8'd0);
    ia = (ea == 8'hff) && (fa == '0);
    ib = (eb == 8'hff) && (fb == '0);
    ic = (ec == 8'hff) && (fc == '0);
    na = (ea == 8'hff) && (fa != '0);
    nb = (eb == 8'hff) && (fb != '0);
    nc = (ec == 8'hff) && (fc != '0);
    sp = sa ^ sb;

    // Exact product; both operands sit on the same scale: value = w * 2^(e-303)
    pm = {1'b1, fa} * {1'b1, fb};
    ex = {2'b00, ea} + {2'b00, eb};
    ey = zc ? 10'd0 : ({2'b00, ec} + 10'd127);
    xw = {pm, 3'b000};
    yw = zc ? '0 : {1'b0, 1'b1, fc, 26'd0};

    // Align the operand with the smaller exponent
    x_big = (ex >= ey);
    dexp  = x_big ? (ex - ey) : (ey - ex);
    big_e = x_big ? ex : ey;
    xs    = x_big ? xw : shr_sticky(xw, dexp);
    ys    = x_big ? shr_sticky(yw, dexp) : yw;

    // Add or subtract magnitudes
    eff_sub = sp ^ sc;
    if (!eff_sub) begin
      s   = {1'b0, xs} + {1'b0, ys};
      sgn = sp;
    end else if (xs >= ys) begin
      s   = {1'b0, xs} - {1'b0, ys};
      sgn = sp;
    end else begin
      s   = {1'b0, ys} - {1'b0, xs};
      sgn = sc;
    end

    // Normalise
    p = '0;
    for (int i = 0; i < 52; i++) begin
      if (s[i]) p = 6'(i);
    end
    n  = s << (6'd51 - p);
    er = 12'(p) + 12'(big_e) - 12'sd176;

    // Round to nearest, ties to even
    mant = n[51:28];
    g    = n[27];
    st   = |n[26:0];
    rnd  = g & (st | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant = mant_r[24:1];
      er   = er + 12'sd1;
    end else begin
      mant = mant_r[23:0];
    end

    // Result selection, special cases first
    if (na || nb || nc) begin
      y = QNAN;
    end else if ((ia && zb) || (ib && za)) begin
      y = QNAN;
    end else if (ia || ib) begin
      y = (ic && (sc != sp)) ? QNAN : {sp, 8'hff, 23'd0};
    end else if (ic) begin
      y = {sc, 8'hff, 23'd0};
    end else if (za || zb) begin
      y = zc ? {sp & sc, 31'd0} : c;
    end else if (s == '0) begin
      y = 32'd0;
    end else if (er >= 12'sd255) begin
      y = {sgn, 8'hff, 23'd0};
    end else if (er <= 12'sd0) begin
      y = {sgn, 31'd0};
    end else begin
      y = {sgn, er[7:0], mant[22:0]};
    end
  end

endmodule
