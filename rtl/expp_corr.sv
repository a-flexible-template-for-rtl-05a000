// expp_corr: polynomial correction of the mantissa produced by Schraudolph's
// exponential, the P(x) circuit of the expp algorithm.
//
// x is frac(x') on 7 bits (value x/128). The top bit picks one of two
// second-order pieces of the form a*x*(x+b):
//   x[6] = 0 : P = alpha * x[5:0] * (x + gamma1)
//   x[6] = 1 : P = not( beta * not(x[5:0]) * (x + gamma2) )
// which follows the published block diagram: a mux between x[5:0] and its
// one's complement, a mux between alpha and beta, a mux between gamma1 and
// gamma2, an adder, two multipliers and a final optional inversion, all
// steered by x[6]. Products are kept at full width and truncated to 7 bits
// at the end (the truncation point is this implementation's choice).
// Purely combinational.
module expp_corr
  import softex_pkg::*;
(
  input  logic [6:0] x,
  output logic [6:0] p
);
  logic        hi;
  logic [5:0]  xm;           // x[5:0] or its complement
  logic [3:0]  coef;         // alpha or beta (4-bit integer)
  logic [7:0]  gamma;        // gamma1 or gamma2 (8-bit integer, 2^-6)
  logic [8:0]  xg;           // x + gamma, units of 2^-7
  logic [9:0]  cx;           // coef * xm
  logic [18:0] prod;         // cx * xg
  logic [6:0]  pq;

  always_comb begin
    hi    = x[6];
    xm    = hi ? ~x[5:0] : x[5:0];
    coef  = hi ? 4'(EXPP_BETA) : 4'(EXPP_ALPHA);
    gamma = hi ? 8'(EXPP_GAMMA2) : 8'(EXPP_GAMMA1);
    xg    = {2'b00, x} + {gamma, 1'b0};
    cx    = coef * xm;
    prod  = cx * xg;
    // value of prod: coef*2^-sh * xm*2^-7 * xg*2^-7 ; keep 7 fraction bits
    if (hi) pq = prod[EXPP_BETA_SH+7 +: 7];
    else    pq = prod[EXPP_ALPHA_SH+7 +: 7];
    p = hi ? ~pq : pq;
  end
endmodule
