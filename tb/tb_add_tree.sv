// tb_add_tree: random BF16 lane values in [0, 1] with random lane masks are
// summed by the FP32 adder tree; the result must match the real sum of the
// unmasked lanes to within a few FP32 rounding steps (1e-6 relative).
module tb_add_tree;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  localparam int N = 16;
  bf16_t x [N];
  logic [N-1:0] mask;
  fp32_t sum;
  int checks = 0, failures = 0;
  add_tree #(.N(N)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real ref_s;
    for (int t = 0; t < 1000; t++) begin
      mask = (t % 4 == 0) ? N'($urandom) : '1;
      ref_s = 0.0;
      for (int i = 0; i < N; i++) begin
        x[i] = r2bf(real'($urandom_range(0, 10000)) / 10000.0);
        if (mask[i]) ref_s += bf2r(x[i]);
      end
      #1;
      checks++;
      if (rabs(fp2r(sum) - ref_s) > ref_s * 1e-6 + 1e-30) begin
        failures++;
        $display("FAIL sum %g expected %g", fp2r(sum), ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
