// add_tree: FP32 adder tree that reduces the N lane exponentials of one
// vector to a single addend for the denominator accumulator.
//
// The BF16 inputs are widened to FP32 by zero padding the mantissa; masked
// lanes contribute 0. The tree has log2(N) levels of FP32 adders (each an
// fp_fma with b = 1.0, round to nearest even), and is combinational; the
// denominator accumulator's input FIFO registers its result. The FP32
// width is published; a binary tree, which requires N to be a power of
// two, is this implementation's choice.
module add_tree
  import softex_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  bf16_t        x [N],
  input  logic [N-1:0] mask,
  output fp32_t        sum
);
  localparam int unsigned L = $clog2(N);

  // level l holds N >> l partial sums; level 0 are the widened inputs
  for (genvar l = 0; l <= int'(L); l++) begin : g_lvl
    fp32_t s [N >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < int'(N); i++) begin : g_in
        assign s[i] = mask[i] ? bf16_to_fp32(x[i]) : '0;
      end
    end else begin : g_node
      for (genvar i = 0; i < int'(N >> l); i++) begin : g_add
        fp_fma #(.EW(8), .MW(23)) u_add (
          .a(g_lvl[l-1].s[2*i]), .b(FP32_ONE), .c(g_lvl[l-1].s[2*i+1]), .y(s[i]));
      end
    end
  end

  assign sum = g_lvl[L].s[0];

  initial assert (N == (1 << L)) else $error("add_tree: N must be a power of two");
endmodule
