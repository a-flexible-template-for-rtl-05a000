// expu: BF16 exponential unit implementing expp(x) = 2^int(x') * (1 + P(frac(x'))),
// with x' = x / ln 2.
//
// The first part is Schraudolph's method on a BF16 input: the signed
// mantissa (hidden one included) is multiplied by 1/ln2, shifted by the
// unbiased exponent so that the result carries 7 fractional bits, and the
// exponent bias shifted left by 7 is added. Reinterpreted as a BF16 bit
// pattern, bits [14:7] of that integer are the result exponent and bits
// [6:0] are frac(x'). The second part replaces those 7 mantissa bits with
// the polynomial correction P (module expp_corr).
// Results that overflow saturate to +inf; results below the smallest normal
// BF16 number flush to 0 (the published algorithm returns +inf / 0 when the
// shifted value leaves the representable range). 1/ln2 is held with 14
// fractional bits and the shift floors (arithmetic right shift); both are
// choices of this implementation.
// Interface: x in, y out, combinational; the caller registers the result.
module expu
  import softex_pkg::*;
(
  input  bf16_t x,
  output bf16_t y
);
  logic              s;
  logic [7:0]        e;
  logic [7:0]        mant;      // 1.m, zero for a zero input
  logic [22:0]       q;         // mant * (1/ln2 in Q14)
  logic signed [31:0] sq, i7, msh;
  int                sh;
  logic [6:0]        frac_p;

  expp_corr u_corr (.x(msh[6:0]), .p(frac_p));

  always_comb begin
    s    = x[15];
    e    = x[14:7];
    mant = (e == 8'd0) ? 8'd0 : {1'b1, x[6:0]};
    q    = mant * 15'(INV_LN2_Q14);
    sq   = s ? -$signed({9'd0, q}) : $signed({9'd0, q});
    sh   = int'(e) - 127;
    // i7 = x' * 2^7 = q * 2^(sh - 14)
    if (sh >= 14)       i7 = s ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
    else if (14 - sh >= 31) i7 = (sq < 0) ? -32'sd1 : 32'sd0;
    else                i7 = sq >>> (14 - sh);
    if (e == 8'hFF)     i7 = s ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
    // add bias << 7, saturating at the ends
    if (i7 > 32'sh0001_0000)        msh = 32'sh0001_0000;
    else if (i7 < -32'sh0001_0000)  msh = -32'sh0001_0000;
    else                            msh = i7 + 32'sd16256;
    if (msh >= 32'sh7F80)      y = BF16_POS_INF;
    else if (msh < 32'sd128)   y = 16'h0000;
    else                       y = {1'b0, msh[14:7], frac_p};
  end
endmodule
