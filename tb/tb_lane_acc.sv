// tb_lane_acc: checks the fixed-point lane accumulator. Random sums of
// 1..6 terms a_i * e_i (e in (0,1], a in [0, 0.125]) are accumulated; the
// BF16 result must match the real sum within the truncation of each term
// to 2^-14, the BF16 product rounding, and the final 7-bit truncation.
// Also checks that `first` restarts the sum and that en = 0 holds it.
module tb_lane_acc;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  bf16_t e = 0, a_w = 0, sum_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lane_acc dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real ref_s, got, tol;
    int nt;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      nt = $urandom_range(1, 6);
      ref_s = 0.0;
      for (int k = 0; k < nt; k++) begin
        e = r2bf(real'($urandom_range(1, 1000)) / 1000.0);
        a_w = r2bf(real'($urandom_range(0, 1000)) / 8000.0);
        ref_s += bf2r(e) * bf2r(a_w);
        first = (k == 0); en = 1;
        #1;
        if (k == nt - 1) begin
          got = bf2r(sum_o);
          tol = nt * (2.0 ** -14) * 1.01 + ref_s * (2.0 ** -7) + ref_s * (2.0 ** -8);
          checks++;
          if (rabs(got - ref_s) > tol) begin
            failures++;
            $display("FAIL %0d terms: got %g expected %g", nt, got, ref_s);
          end
        end
        @(negedge clk);
      end
      // hold: with en = 0 the accumulator keeps its value
      en = 0; first = 0; e = 16'h0; a_w = 16'h0; #1;
      checks++;
      if (rabs(bf2r(sum_o) - ref_s) > nt * (2.0 ** -14) * 1.01 + ref_s * 0.02) begin
        failures++; $display("FAIL hold");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
