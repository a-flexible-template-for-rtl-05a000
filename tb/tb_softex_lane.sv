// tb_softex_lane: one lane in both modes, with random operands.
//   softmax : load x, then e_q = expp(x - max) must match exp(x - max)
//             within the EXPU error (1.5% incl. the BF16 subtraction),
//             and norm_o = bf16(e_q * recip) to BF16 rounding;
//   sum-exp : a pass of nw terms a_i * expp(x * b_i) must match the real
//             sum of the BF16 terms within the fixed-point truncation
//             (weights kept below 1/16 so the sum stays under 1).
// Timing: x is taken with load_x, e_q one cycle later with e_load (and
// held while e_load is low), and
// the accumulator one cycle after that (two register stages).
module tb_softex_lane;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, sumexp = 0, load_x = 0, e_load = 0, acc_en = 0, acc_first = 0;
  bf16_t x_in = 0, max_val = 0, b_w = 0, recip = 0, a_w = 0;
  bf16_t x_q, e_q, norm_o, acc_sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  softex_lane dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real d, ev, s, xv;
    bf16_t mv;
    int nt;
    @(negedge clk); rst_n = 1;
    // softmax
    for (int t = 0; t < 1000; t++) begin
      sumexp = 0;
      x_in = rnd_bf(8.0); max_val = r2bf(bf2r(x_in) + real'($urandom_range(0, 800)) / 100.0);
      recip = r2bf(real'($urandom_range(1, 1000)) / 1000.0);
      load_x = 1; @(negedge clk); load_x = 0;
      e_load = 1; @(negedge clk); e_load = 0;
      // e_q must hold while e_load is low, whatever the MAU input does
      mv = max_val; max_val = r2bf(bf2r(max_val) + 1.0);
      @(negedge clk);
      max_val = mv;
      d = bf2r(r2bf_rne(bf2r(x_in) - bf2r(max_val)));
      ev = $exp(d);
      chk(rabs(bf2r(e_q) - ev) <= ev * 0.015 + 1e-30,
          $sformatf("e %g expected %g", bf2r(e_q), ev));
      chk(rabs(bf2r(norm_o) - bf2r(e_q) * bf2r(recip)) <= bf2r(e_q) * bf2r(recip) * (2.0 ** -8),
          "norm_o");
    end
    // sum of exponentials
    for (int t = 0; t < 300; t++) begin
      sumexp = 1;
      xv = real'($urandom_range(0, 900)) / 100.0;
      x_in = r2bf(xv);
      load_x = 1; @(negedge clk); load_x = 0;
      nt = $urandom_range(1, 16); s = 0.0;
      for (int k = 0; k < nt; k++) begin
        b_w = r2bf(-real'($urandom_range(50, 2000)) / 1000.0);
        a_w = r2bf(real'($urandom_range(0, 1000)) / 16000.0);
        e_load = 1; #1;
        ev = $exp(bf2r(r2bf_rne(bf2r(x_in) * bf2r(b_w))));
        s += bf2r(a_w) * ev;
        @(negedge clk); e_load = 0;
        acc_en = 1; acc_first = (k == 0);
        #1;
        // sum_o includes the term being added: read it with the last term
        if (k == nt - 1)
          chk(rabs(bf2r(acc_sum) - s) <= s * 0.02 + nt * (2.0 ** -14) * 1.01,
          $sformatf("sum %g expected %g (%0d terms)", bf2r(acc_sum), s, nt));
        @(negedge clk); acc_en = 0; acc_first = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
