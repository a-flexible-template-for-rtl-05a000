// fp_fma: combinational floating-point fused multiply-add, y = a*b + c.
//
// One rounding step (round to nearest, ties to even) after an exact product
// and an aligned addition with guard, round and sticky bits. The exponent
// and mantissa widths are parameters, so the same code serves as the FP32
// FMA of the denominator accumulator and as the BF16 adder and multiplier
// inside the MAU and the lane accumulator (with b = 1.0 or c = 0).
// Simplifications, all choices of this implementation: subnormal inputs are
// read as zero and subnormal results flush to zero; NaN is not produced
// (an infinite operand gives an infinite result); overflow gives infinity.
// Interface: a, b, c in; y out; purely combinational (zero latency). Any
// pipelining is added by the instantiating block.
module fp_fma #(
  parameter int unsigned EW = 8,    // exponent bits
  parameter int unsigned MW = 23    // stored mantissa bits
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic [EW+MW:0] c,
  output logic [EW+MW:0] y
);
  localparam int unsigned F    = 2 * MW;       // fraction bits of product
  localparam int unsigned G    = 3;            // guard bits below
  localparam int unsigned WD   = F + 3 + G;    // working width
  localparam int          BIAS = (1 << (EW - 1)) - 1;
  localparam int          EMAX = (1 << EW) - 1;

  logic              sa, sb, sc, sp;
  logic [EW-1:0]     ea, eb, ec;
  logic              a_zero, b_zero, c_zero, a_inf, b_inf, c_inf;
  logic [F+1:0]      pm;
  int                ep, ecv, ebig, d, er;
  logic [WD-1:0]     prod_fx, c_fx, big, src, sml, mask, r, rn;
  logic              sbig, ssmall, sticky, sgn, grd, stk, rnd;
  logic [WD:0]       diff;
  logic [MW:0]       man_r;
  int                p, sh;

  always_comb begin
    sa = a[EW+MW]; sb = b[EW+MW]; sc = c[EW+MW];
    ea = a[EW+MW-1:MW]; eb = b[EW+MW-1:MW]; ec = c[EW+MW-1:MW];
    a_zero = (ea == '0); b_zero = (eb == '0); c_zero = (ec == '0);
    a_inf  = (ea == '1); b_inf  = (eb == '1); c_inf  = (ec == '1);
    sp = sa ^ sb;
    pm = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    ep  = int'(ea) + int'(eb) - BIAS;
    ecv = int'(ec);
    prod_fx = WD'(pm) << G;
    c_fx    = WD'({1'b1, c[MW-1:0]}) << (MW + G);
    y = '0;
    big = '0; sml = '0; src = '0; mask = '0; sticky = 1'b0;
    sbig = 1'b0; ssmall = 1'b0; ebig = 0; d = 0; sh = 0;
    r = '0; rn = '0; diff = '0; sgn = 1'b0; p = 0; er = 0;
    grd = 1'b0; stk = 1'b0; rnd = 1'b0; man_r = '0;

    if ((a_inf && !b_zero) || (b_inf && !a_zero)) begin
      y = {sp, {EW{1'b1}}, {MW{1'b0}}};
    end else if (c_inf) begin
      y = {sc, {EW{1'b1}}, {MW{1'b0}}};
    end else if (a_zero || b_zero) begin
      y = c_zero ? '0 : c;
    end else begin
      // operand with the larger exponent stays, the other is aligned
      if (c_zero) begin
        big = prod_fx; sbig = sp; ebig = ep; src = '0; sh = 0; ssmall = sp;
      end else begin
        d = ep - ecv;
        if (d >= 0) begin
          big = prod_fx; sbig = sp; ebig = ep; src = c_fx; ssmall = sc; sh = d;
        end else begin
          big = c_fx; sbig = sc; ebig = ecv; src = prod_fx; ssmall = sp; sh = -d;
        end
      end
      if (sh >= int'(WD)) begin
        sml  = '0;
        sticky = (src != '0);
      end else begin
        mask   = ~({WD{1'b1}} << sh);
        sml  = src >> sh;
        sticky = ((src & mask) != '0);
      end
      sml[0] = sml[0] | sticky;

      if (sbig == ssmall) begin
        r   = big + sml;
        sgn = sbig;
      end else begin
        diff = {1'b0, big} - {1'b0, sml};
        if (diff[WD]) begin
          r   = WD'(-diff);
          sgn = ssmall;
        end else begin
          r   = diff[WD-1:0];
          sgn = sbig;
        end
      end

      if (r == '0) begin
        y = '0;
      end else begin
        p = 0;
        for (int i = 0; i < int'(WD); i++)
          if (r[i]) p = i;
        er  = ebig + p - int'(G + F);
        rn  = r << (int'(WD) - 1 - p);
        grd = rn[WD-2-MW];
        stk = (rn[WD-3-MW:0] != '0);
        rnd = grd & (stk | rn[WD-1-MW]);
        man_r = {1'b0, rn[WD-2 -: MW]} + (MW+1)'(rnd);
        if (man_r[MW]) er = er + 1;       // rounding carried into exponent
        if (er >= EMAX)
          y = {sgn, {EW{1'b1}}, {MW{1'b0}}};
        else if (er <= 0)
          y = '0;
        else
          y = {sgn, EW'(er), man_r[MW-1:0]};
      end
    end
  end
endmodule
