// tb_mau: checks the MAU's input register, its adder (x - max, softmax
// mode) and its multiplier (x * b in sum-of-exp mode, e * recip in
// softmax mode) against real arithmetic: each result must lie within half
// a BF16 unit in the last place (round to nearest) of the exact value.
module tb_mau;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, sumexp = 0, load = 0;
  bf16_t x_in = 0, max_val = 0, b_w = 0, recip = 0, e_in = 0, x_q, to_expu, mul_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mau dut (.*);

  task automatic near(input real got, input real ref_v, input string what);
    checks++;
    if (rabs(got - ref_v) > rabs(ref_v) * (2.0 ** -8) * 1.0001 + 1e-30) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, got, ref_v);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bf16_t xv;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      xv = rnd_bf(20.0);
      @(negedge clk); load = 1; x_in = xv;
      @(negedge clk); load = 0; x_in = rnd_bf(5.0);   // must not load
      checks++;
      if (x_q != xv) begin failures++; $display("FAIL register"); end
      max_val = rnd_bf(20.0); b_w = rnd_bf(4.0); recip = rnd_bf(1.0); e_in = rnd_bf(1.0);
      sumexp = 0; #1;
      near(bf2r(to_expu), bf2r(xv) - bf2r(max_val), "x - max");
      near(bf2r(mul_o), bf2r(e_in) * bf2r(recip), "e * recip");
      sumexp = 1; #1;
      near(bf2r(mul_o), bf2r(xv) * bf2r(b_w), "x * b");
      checks++;
      if (to_expu != mul_o) begin failures++; $display("FAIL sum-of-exp EXPU input"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
