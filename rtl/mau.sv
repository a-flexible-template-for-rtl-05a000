// mau: BF16 Multiplication and Addition Unit of one SoftEx lane.
//
// Holds the lane's input score in a register (loaded with `load`) and
// provides the two BF16 operations the lane needs:
//   adder      : sub_o = x - max          (softmax, both passes)
//   multiplier : mul_o = x * b_w          (sum of exponentials)
//                mul_o = e_in * recip     (softmax normalisation)
// The value forwarded to the exponential unit, to_expu, is the adder output
// in softmax and the multiplier output in the sum-of-exponentials mode.
// The operand selection follows the lane diagram (an input register, an
// adder taking the negated maximum and a multiplier whose operands are
// chosen by mode); the operators are BF16 with round to nearest even, a
// choice of this implementation. e_in must come from a register (the
// lane's EXPU output register) so no combinational loop closes through
// the EXPU. Timing: x is registered, everything else combinational.
module mau
  import softex_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sumexp,     // 1: sum-of-exp mode, 0: softmax
  input  logic  load,
  input  bf16_t x_in,
  input  bf16_t max_val,
  input  bf16_t b_w,
  input  bf16_t recip,
  input  bf16_t e_in,
  output bf16_t x_q,
  output bf16_t to_expu,
  output bf16_t mul_o
);
  bf16_t sub_o, mul_a, mul_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x_q <= '0;
    else if (load) x_q <= x_in;
  end

  assign mul_a = sumexp ? x_q : e_in;
  assign mul_b = sumexp ? b_w : recip;

  fp_fma #(.EW(8), .MW(7)) u_add (
    .a(x_q), .b(BF16_ONE), .c({~max_val[15], max_val[14:0]}), .y(sub_o));
  fp_fma #(.EW(8), .MW(7)) u_mul (
    .a(mul_a), .b(mul_b), .c(16'h0000), .y(mul_o));

  assign to_expu = sumexp ? mul_o : sub_o;
endmodule
