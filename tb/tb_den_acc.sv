// tb_den_acc: drives the denominator accumulator with random streams of
// FP32 addends, some carrying a rescale difference (curr_max - new_max),
// with a random valid pattern. The reference is den = den*exp(diff) +
// addend in real arithmetic. Checks: the denominator within the EXPU error
// (2% per rescale bound, loosely), recip * den = 1 within 0.4%: the seed
// (1 + not(M)^2/2) * 2^(-1-e) is up to 25% low, and two Newton steps take
// that error to its fourth power, 0.39%, the rescale count, that a dense run of rescales stalls
// the input (ready low), and the finish-to-done latency (reduction of P
// slots plus four Newton cycles, at most P + 8 cycles).
module tb_den_acc;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  localparam int P = 3;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, in_rescale = 0;
  logic finish = 0, done;
  fp32_t in_addend = 0, den_o, recip_o;
  bf16_t in_diff = 0, recip_bf16;
  logic [31:0] rescale_cnt, stall_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  den_acc #(.P(P)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real ref_d, a, dr;
    int nres, n, lat, dense;
    logic [31:0] res0;
    @(negedge clk); rst_n = 1;
    for (int job = 0; job < 30; job++) begin
      dense = (job % 5 == 4);
      clear = 1; @(negedge clk); clear = 0;
      ref_d = 0.0; nres = 0; res0 = rescale_cnt;
      n = $urandom_range(1, 40);
      for (int k = 0; k < n; k++) begin
        a = real'($urandom_range(1, 16000)) / 1000.0;
        in_addend = r2fp(a);
        in_rescale = (k > 0) && (dense || $urandom_range(0, 3) == 0);
        in_diff = r2bf(-real'($urandom_range(1, 3000)) / 1000.0);
        if (in_rescale) begin ref_d = ref_d * $exp(bf2r(in_diff)); nres++; end
        ref_d += a;
        in_valid = dense || ($urandom_range(0, 2) != 0);
        while (!in_valid) begin @(negedge clk); in_valid = $urandom_range(0, 1); end
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = 0; in_rescale = 0;
      end
      finish = 1;
      lat = 0;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      finish = 0;
      chk(done, "done never rose");
      chk(rabs(fp2r(den_o) - ref_d) <= ref_d * (0.005 + 0.012 * nres),
          $sformatf("den %g expected %g (%0d rescales)", fp2r(den_o), ref_d, nres));
      chk(rabs(fp2r(recip_o) * fp2r(den_o) - 1.0) < 0.0040,
          $sformatf("recip %g for den %g", fp2r(recip_o), fp2r(den_o)));
      chk(rabs(bf2r(recip_bf16) * fp2r(den_o) - 1.0) < 0.0040 + 2.0 ** -8, "recip bf16");
      chk(rescale_cnt - res0 == nres, $sformatf("rescale count %0d vs %0d", rescale_cnt - res0, nres));
      // the FIFO drains at most P cycles per rescale behind the input
      chk(lat <= P + 8 + P * 2, $sformatf("finish-to-done %0d cycles", lat));
      if (dense && n > 8) chk(stall_cnt > 0, "dense rescales did not stall the input");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
