// lane_acc: fixed-point lane accumulator for the sum of exponentials.
//
// Each valid cycle it weights the lane's exponential e by the current a_i
// with a BF16 multiplier, converts the product to fixed point (FL2FX) and
// adds it to a 14-bit accumulator. sum_o is the BF16 conversion (FX2FL) of
// the accumulator including the current term, so the caller can take the
// finished sum in the same cycle as the last term. `first` restarts the
// sum with the current term.
// Fixed-point format (this implementation's choice; only the 14-bit width
// is published): unsigned, LSB = 2^-14, saturating at 2^14-1. Since the
// sum is bounded by 0.5, values stay well inside the range; negative
// products (not expected) are clamped to 0. FL2FX truncates; FX2FL
// truncates to a 7-bit mantissa.
// Timing: one register (the accumulator); output combinational.
module lane_acc
  import softex_pkg::*;
#(
  parameter int unsigned ACC_W = 14
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,       // accumulate this cycle
  input  logic  first,    // first term of a new sum
  input  bf16_t e,
  input  bf16_t a_w,
  output bf16_t sum_o
);
  bf16_t             prod;
  logic [ACC_W-1:0]  term, acc_q, base;
  logic [ACC_W:0]    sum;
  logic [ACC_W-1:0]  sum_sat;
  logic [7:0]        mant;
  int                sh, lead;
  logic [ACC_W+7:0]  wide;

  fp_fma #(.EW(8), .MW(7)) u_mul (.a(e), .b(a_w), .c(16'h0000), .y(prod));

  // FL2FX: value = 1.m * 2^(E-127); in LSB units of 2^-ACC_W this is
  // mant8 * 2^(E - 127 + ACC_W - 7)
  always_comb begin
    mant = {1'b1, prod[6:0]};
    sh   = int'(prod[14:7]) - 127 + int'(ACC_W) - 7;
    wide = '0;
    if (prod[15] || prod[14:7] == 8'd0) begin
      term = '0;
    end else if (sh >= 0) begin
      if (sh > int'(ACC_W)) term = '1;
      else begin
        wide = (ACC_W+8)'(mant) << sh;
        term = (wide[ACC_W+7:ACC_W] != '0) ? '1 : wide[ACC_W-1:0];
      end
    end else if (-sh >= 8) begin
      term = '0;
    end else begin
      term = ACC_W'(mant >> (-sh));
    end
  end

  assign base    = first ? '0 : acc_q;
  assign sum     = {1'b0, base} + {1'b0, term};
  assign sum_sat = sum[ACC_W] ? '1 : sum[ACC_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc_q <= '0;
    else if (en) acc_q <= sum_sat;
  end

  // FX2FL: leading one at bit p -> exponent 127 + p - ACC_W
  always_comb begin
    lead = -1;
    for (int i = 0; i < int'(ACC_W); i++)
      if (sum_sat[i]) lead = i;
    if (lead < 0) begin
      sum_o = '0;
    end else begin
      sum_o[15]   = 1'b0;
      sum_o[14:7] = 8'(127 + lead - int'(ACC_W));
      sum_o[6:0]  = 7'(({sum_sat, 7'b0} >> lead) & {ACC_W+7{1'b1}});
    end
  end
endmodule
