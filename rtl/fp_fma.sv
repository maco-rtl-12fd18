// fp_fma: combinational floating-point fused multiply-add, y = a*b + c.
//
// Parameterised by exponent and fraction width, so one description serves
// the FP64 (11/52), FP32 (8/23) and FP16 (5/10) lanes of a processing
// element. The exact product is aligned with the addend, summed, normalised
// and rounded once to nearest-even.
//
// Simplifications (this design's choice; the source design only says each PE
// performs a MAC): subnormal inputs and results are flushed to zero,
// exponent overflow gives infinity, and infinity/NaN inputs are treated as
// ordinary large numbers. Purely combinational, no clock.
module fp_fma #(
  parameter int unsigned EW = 11,
  parameter int unsigned MW = 52
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic [EW+MW:0] c,
  output logic [EW+MW:0] y
);
  localparam int unsigned P    = MW + 1;        // significand with hidden bit
  localparam int unsigned SW   = 2*P + 4;       // sum width: carry + 2P + 3 guard
  localparam int          BIAS = (1 << (EW-1)) - 1;
  localparam int          EMAX = (1 << EW) - 1;

  logic            sa, sb, sc, sp;
  logic [EW-1:0]   ea, eb, ec;
  logic [P-1:0]    ma, mb, mc;
  logic [2*P-1:0]  pm;
  logic [SW-1:0]   xp, xc, bg, lit, mag, norm;
  int              ep, ecc, e_big, d, lead, er;
  logic            s_big, s_small, s_res, sticky, guard, rnd;
  logic [P:0]      mant;

  always_comb begin
    sa = a[EW+MW]; sb = b[EW+MW]; sc = c[EW+MW];
    ea = a[MW +: EW]; eb = b[MW +: EW]; ec = c[MW +: EW];
    ma = (ea == '0) ? '0 : {1'b1, a[MW-1:0]};
    mb = (eb == '0) ? '0 : {1'b1, b[MW-1:0]};
    mc = (ec == '0) ? '0 : {1'b1, c[MW-1:0]};
    sp = sa ^ sb;
    pm = ma * mb;
    // both operands as X * 2^(E - BIAS - 2MW - 3)
    xp  = {2'b00, pm, 2'b00} << 1;
    xc  = SW'({mc, {MW{1'b0}}, 3'b000});
    ep  = (pm == '0) ? 0 : int'(ea) + int'(eb) - BIAS;
    ecc = (mc == '0) ? 0 : int'(ec);
    if (pm == '0) begin
      ep = ecc;
    end
    if (ep >= ecc) begin
      bg = xp; lit = xc; s_big = sp; s_small = sc; e_big = ep; d = ep - ecc;
    end else begin
      bg = xc; lit = xp; s_big = sc; s_small = sp; e_big = ecc; d = ecc - ep;
    end
    if (d >= int'(SW)) begin
      sticky = |lit;
      lit  = '0;
    end else begin
      sticky = |(lit & ((SW'(1) << d) - SW'(1)));
      lit  = lit >> d;
    end
    lit[0] = lit[0] | sticky;
    if (s_big == s_small) begin
      mag = bg + lit; s_res = s_big;
    end else if (bg >= lit) begin
      mag = bg - lit; s_res = s_big;
    end else begin
      mag = lit - bg; s_res = s_small;
    end
    lead = 0;
    for (int i = 0; i < int'(SW); i++) begin
      if (mag[i]) lead = i;
    end
    norm  = mag << (int'(SW) - 1 - lead);
    mant  = {1'b0, norm[SW-1 -: P]};
    guard = norm[SW-1-P];
    rnd   = |norm[SW-2-P:0];
    er    = lead + e_big - 2*int'(MW) - 3;
    if (guard && (rnd || mant[0])) begin
      mant = mant + 1'b1;
    end
    if (mant[P]) begin
      mant = mant >> 1;
      er   = er + 1;
    end
    if (mag == '0 || er <= 0) begin
      y = '0;
      y[EW+MW] = (mag == '0) ? (s_big & s_small) : s_res;
    end else if (er >= EMAX) begin
      y = {s_res, {EW{1'b1}}, {MW{1'b0}}};
    end else begin
      y = {s_res, EW'(er), mant[MW-1:0]};
    end
  end
endmodule
