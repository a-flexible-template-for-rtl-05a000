// tb_expu: self-checking test of the BF16 exponential unit.
// Sweeps every BF16 value with magnitude in [2^-6, 64) and compares expu
// against the real exponential computed by the simulator: each result must
// be within 1.6 % (published maximum 0.78 % plus one BF16 truncation step
// of the output), and the mean relative error must stay below 0.35 %.
// Also checks exact corner cases (zero, saturation to +inf and to 0).
module tb_expu;
  import softex_pkg::*;
  bf16_t x, y;
  int checks = 0, failures = 0;
  int n = 0;
  real sum_err = 0.0, max_err = 0.0;

  expu dut (.x(x), .y(y));

  function automatic real bf2r(input bf16_t v);
    real r;
    if (v[14:7] == 8'd0) return 0.0;
    r = (1.0 + real'(v[6:0]) / 128.0) * (2.0 ** (real'(int'(v[14:7]) - 127)));
    return v[15] ? -r : r;
  endfunction

  task automatic check_exact(input bf16_t xi, input bf16_t exp_y);
    x = xi; #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL exact x=%h y=%h expected %h", xi, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, ref_y, got, err;
    check_exact(16'h0000, 16'h3F80);     // exp(0) = 1
    check_exact(16'h8000, 16'h3F80);     // exp(-0) = 1
    check_exact(16'h42C8, BF16_POS_INF); // exp(100) overflows
    check_exact(16'hC2C8, 16'h0000);     // exp(-100) underflows
    check_exact(BF16_NEG_INF, 16'h0000);
    check_exact(BF16_POS_INF, BF16_POS_INF);
    for (int s = 0; s < 2; s++) begin
      for (int e = 121; e < 133; e++) begin   // 2^-6 .. 2^5 exponents
        for (int m = 0; m < 128; m++) begin
          x = {1'(s), 8'(e), 7'(m)};
          #1;
          xr = bf2r(x);
          ref_y = $exp(xr);
          if (ref_y < 1.0e-37 || ref_y > 1.0e37) continue;
          got = bf2r(y);
          err = (got - ref_y) / ref_y;
          if (err < 0) err = -err;
          sum_err += err;
          n++;
          if (err > max_err) max_err = err;
          checks++;
          if (err > 0.016) begin
            failures++;
            $display("FAIL x=%h (%f) y=%h (%g) ref %g err %f", x, xr, y, got, ref_y, err);
          end
        end
      end
    end
    checks++;
    if (sum_err / n > 0.0035) begin
      failures++;
      $display("FAIL mean relative error %f", sum_err / n);
    end
    $display("expu: %0d samples, mean rel err %f, max rel err %f", n, sum_err / n, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
