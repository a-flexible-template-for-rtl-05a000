// softex_lane: one lane of the SoftEx datapath: MAU, EXPU, EXPU output
// register and lane accumulator.
//
// Stage 1 is the MAU input register (x_q); its adder or multiplier feeds
// the EXPU combinationally. Stage 2 is the EXPU output register e_q,
// loaded with e_load. From e_q the lane offers
//   e_q     : expp(x - max), to the adder tree (softmax accumulation),
//   norm_o  : e_q * recip from the MAU multiplier (softmax normalisation),
//   acc_sum : the lane accumulator's running sum of a_i * e_q (sum of
//             exponentials), updated with acc_en.
// The split into two register stages is this implementation's choice; the
// units and their connections follow the lane diagram.
module softex_lane
  import softex_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sumexp,
  input  logic  load_x,
  input  bf16_t x_in,
  input  bf16_t max_val,
  input  bf16_t b_w,
  input  bf16_t recip,
  input  logic  e_load,
  input  logic  acc_en,
  input  logic  acc_first,
  input  bf16_t a_w,
  output bf16_t x_q,
  output bf16_t e_q,
  output bf16_t norm_o,
  output bf16_t acc_sum
);
  bf16_t to_expu, e_d;

  mau u_mau (
    .clk, .rst_n, .sumexp, .load(load_x), .x_in, .max_val, .b_w, .recip,
    .e_in(e_q), .x_q, .to_expu, .mul_o(norm_o));

  expu u_expu (.x(to_expu), .y(e_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      e_q <= '0;
    else if (e_load) e_q <= e_d;
  end

  lane_acc #(.ACC_W(14)) u_acc (
    .clk, .rst_n, .en(acc_en), .first(acc_first), .e(e_q), .a_w, .sum_o(acc_sum));
endmodule
