// max_unit: running maximum of the softmax scores.
//
// In the accumulation pass each accepted input vector (N BF16 scores, with
// a lane mask for a partial last vector) is compared against the current
// maximum held in the `curr max` register. new_max is the larger of the
// two and is what the MAUs subtract from the scores of that same vector,
// so every exponent argument is <= 0. When the maximum grows (and it is not
// the first vector), upd is raised and diff = curr_max - new_max (a BF16
// subtraction, always <= 0) is sent to the denominator accumulator, which
// rescales its partial sums by expp(diff). In the normalisation pass the
// register is frozen and new_max equals the final maximum.
// Timing: the register updates on `update`; everything else is
// combinational. `clear` sets the maximum to -inf before a new vector.
module max_unit
  import softex_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         update,       // accept the vector below
  input  bf16_t        x [N],
  input  logic [N-1:0] mask,
  output bf16_t        new_max,
  output bf16_t        curr_max,
  output logic         upd,          // maximum grew, rescale needed
  output bf16_t        diff          // curr_max - new_max
);
  logic  first_q;
  bf16_t vmax;

  always_comb begin
    vmax = curr_max;
    for (int i = 0; i < int'(N); i++)
      if (mask[i] && bf16_gt(x[i], vmax)) vmax = x[i];
    new_max = vmax;
  end

  assign upd = !first_q && (new_max != curr_max);

  fp_fma #(.EW(8), .MW(7)) u_sub (
    .a(curr_max), .b(BF16_ONE), .c({~new_max[15], new_max[14:0]}), .y(diff));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      curr_max <= BF16_NEG_INF;
      first_q  <= 1'b1;
    end else if (clear) begin
      curr_max <= BF16_NEG_INF;
      first_q  <= 1'b1;
    end else if (update) begin
      curr_max <= new_max;
      first_q  <= 1'b0;
    end
  end
endmodule
