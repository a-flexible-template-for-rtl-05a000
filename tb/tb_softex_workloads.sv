// tb_softex_workloads: the cluster at its default sizes running the
// vector sizes of the evaluated workloads, one job each, with cores and
// the tensor engine loading the memory in the background:
//   softmax rows of 128 and 512 elements (attention rows of a BERT-style
//   model at sequence lengths 128 and 512), 197 (ViT-base sequence
//   length), 1024 (accuracy vectors) and 2048 elements (lane sweep);
//   GELU on 2^14 elements: the testbench plays the cores (x^2 before,
//   x*(1-s) or x*s after) and SoftEx computes s = sum_i a_i exp(-b_i x^2)
//   with four terms. The weights follow the rectangle rule on Craig's
//   integral: theta_i = i*pi/8, a_i = 1/8, b_i = 1/(2 sin^2 theta_i).
// Checks: every output (softmax within 3%, the sum within 4% + 2^-12),
// GELU within 0.045 of x*Phi(x) computed here with a series (the
// four-term rectangle-rule weights are themselves off by up to 0.04; the
// minimax-optimised weights are not reproduced here),
// and the job length read from the CYCLES register: softmax at most
// 3*ceil(L/16) + 3*rescales + 48 cycles (the accumulation pass reads one
// 16-element vector per cycle; in the normalisation pass reads and
// writes share the one memory port, two cycles per vector), the sum of exponentials between 4*ceil(L/16) and
// 4*ceil(L/16) + 48 (one output vector every N_w = 4 cycles), both
// with the background traffic switched off during the timed runs.
module tb_softex_workloads;
  import softex_pkg::*;
  localparam int NC = 8, ND = 4, TW = 16;

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] core_req = '0, core_gnt, core_we = '0, core_rvalid;
  logic [31:0]   core_addr [NC], core_wdata [NC], core_rdata [NC];
  logic [3:0]    core_be [NC];
  logic [ND-1:0] dma_req = '0, dma_gnt, dma_we = '0, dma_rvalid;
  logic [31:0]   dma_addr [ND], dma_wdata [ND], dma_rdata [ND];
  logic [3:0]    dma_be [ND];
  logic tpe_req = 0, tpe_gnt, tpe_we = 0, tpe_rvalid;
  logic [31:0] tpe_addr = 0;
  logic [TW*4-1:0] tpe_be = '1;
  logic [TW*32-1:0] tpe_wdata = '0, tpe_rdata;
  logic cfg_req = 0, cfg_gnt, cfg_we = 0, cfg_rvalid, softex_busy, softex_evt;
  logic [31:0] cfg_addr = 0, cfg_wdata = 0, cfg_rdata;
  int checks = 0, failures = 0;
  bit bg_en = 0;
  int n_softmax = 0, n_sumexp = 0;

  always #5 clk = ~clk;

  softex_cluster dut (.*);

  initial begin
    for (int i = 0; i < NC; i++) begin
      core_addr[i] = 0; core_wdata[i] = 0; core_be[i] = 4'hF;
    end
    for (int i = 0; i < ND; i++) begin
      dma_addr[i] = 0; dma_wdata[i] = 0; dma_be[i] = 4'hF;
    end
  end

  // background traffic: cores 4..7 and the tensor engine read at random
  always @(negedge clk) begin
    for (int c = 4; c < NC; c++) begin
      if (!core_req[c] || core_gnt[c]) begin
        core_req[c]  = bg_en && ($urandom_range(0, 1) == 1);
        core_addr[c] = 32'h2_0000 + 4 * $urandom_range(0, 4095);
      end
    end
    if (!tpe_req || tpe_gnt) begin
      tpe_req  = bg_en && ($urandom_range(0, 2) == 0);
      tpe_addr = 32'h3_0000 + 64 * $urandom_range(0, 255);
    end
  end

  task automatic core_access(input bit we, input logic [31:0] addr,
                             input logic [31:0] wdata, output logic [31:0] rdata);
    @(negedge clk);
    core_req[0] = 1; core_we[0] = we; core_addr[0] = addr; core_wdata[0] = wdata;
    @(posedge clk);
    while (!core_gnt[0]) @(posedge clk);
    @(negedge clk);
    core_req[0] = 0;
    rdata = core_rdata[0];
  endtask
  task automatic wr16(input int elem_addr, input bf16_t v);   // byte addr
    logic [31:0] r;
    core_be[0] = elem_addr[1] ? 4'b1100 : 4'b0011;
    core_access(1, {elem_addr[31:2], 2'b00}, {v, v}, r);
    core_be[0] = 4'hF;
  endtask
  task automatic rd16(input int elem_addr, output bf16_t v);
    logic [31:0] r;
    core_access(0, {elem_addr[31:2], 2'b00}, 0, r);
    v = elem_addr[1] ? r[31:16] : r[15:0];
  endtask

  task automatic cfg_write(input int reg_idx, input logic [31:0] v);
    @(negedge clk); cfg_req = 1; cfg_we = 1; cfg_addr = reg_idx * 4; cfg_wdata = v;
    @(negedge clk); cfg_req = 0; cfg_we = 0;
  endtask

  function automatic real bf2r(input bf16_t v);
    real r;
    if (v[14:7] == 8'd0) return 0.0;
    r = (1.0 + real'(v[6:0]) / 128.0) * (2.0 ** (real'(int'(v[14:7]) - 127)));
    return v[15] ? -r : r;
  endfunction
  function automatic bf16_t r2bf(input real r);
    int e; real m; bit s;
    if (r == 0.0) return 16'h0;
    s = (r < 0); if (s) r = -r;
    e = 0; m = r;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 8'(e + 127), 7'($rtoi((m - 1.0) * 128.0))};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_job();
    cfg_write(REG_TRIGGER, 1);
    bg_en = 1;
    @(posedge softex_evt);
    bg_en = 0;
    repeat (2) @(posedge clk);
  endtask


  localparam int IN = 32'h0_1000, OUT = 32'h1_0000, WA = 32'h0_0800, WB = 32'h0_0840;
  int unsigned cyc;

  task automatic wr32(input int addr, input logic [31:0] v);
    logic [31:0] r;
    core_access(1, addr, v, r);
  endtask
  task automatic rd32(input int addr, output logic [31:0] v);
    core_access(0, addr, 0, v);
  endtask
  task automatic timed_job();
    logic [31:0] r;
    cfg_write(REG_TRIGGER, 1);
    @(posedge softex_evt);
    repeat (2) @(posedge clk);
    @(negedge clk); cfg_req = 1; cfg_we = 0; cfg_addr = REG_CYCLES * 4;
    @(negedge clk); cfg_req = 0; cyc = cfg_rdata;
  endtask

  // standard normal CDF by its Taylor series (|x| <= 5)
  function automatic real phi(input real x);
    real term = x, sum = x;
    for (int n = 1; n < 200; n++) begin
      term = term * (-x * x / 2.0) / n;
      sum += term / (2 * n + 1);
    end
    return 0.5 + sum / $sqrt(2.0 * 3.14159265358979);
  endfunction

  task automatic softmax_row(input int len);
    real xs [], mx, den, ref_p, got;
    logic [31:0] w;
    int nb, r0;
    xs = new[len + 1];
    bg_en = 1;
    for (int i = 0; i < len; i += 2) begin
      bf16_t v0 = r2bf((real'($urandom_range(0, 2000)) - 1000.0) / 120.0);
      bf16_t v1 = r2bf((real'($urandom_range(0, 2000)) - 1000.0) / 120.0);
      wr32(IN + 2 * i, {v1, v0});
      xs[i] = bf2r(v0); xs[i + 1] = bf2r(v1);
    end
    bg_en = 0;
    mx = xs[0];
    for (int i = 0; i < len; i++) if (xs[i] > mx) mx = xs[i];
    den = 0.0;
    for (int i = 0; i < len; i++) den += $exp(xs[i] - mx);
    cfg_write(REG_MODE, MODE_SOFTMAX);
    cfg_write(REG_IN_ADDR, IN);
    cfg_write(REG_OUT_ADDR, OUT);
    cfg_write(REG_LEN, len);
    r0 = dut.u_softex.u_dp.rescale_cnt;
    timed_job();
    nb = (len + 15) / 16;
    r0 = dut.u_softex.u_dp.rescale_cnt - r0;
    $display("softmax of %0d elements: %0d cycles, %0d rescales", len, cyc, r0);
    check(cyc <= 3 * nb + 3 * r0 + 48, $sformatf("softmax %0d took %0d cycles", len, cyc));
    n_softmax++;
    for (int i = 0; i < len; i += 2) begin
      rd32(OUT + 2 * i, w);
      for (int k = 0; k < 2 && i + k < len; k++) begin
        ref_p = $exp(xs[i + k] - mx) / den;
        got = bf2r(k ? w[31:16] : w[15:0]);
        check((got - ref_p < 0.03 * ref_p + 1e-4) && (ref_p - got < 0.03 * ref_p + 1e-4),
              $sformatf("softmax %0d [%0d] got %g expected %g", len, i + k, got, ref_p));
      end
    end
  endtask

  task automatic gelu(input int len);
    real a [4], b [4], xs [], x2, s, ref_s, y, err, max_err;
    logic [31:0] w;
    bf16_t q [2];
    xs = new[len];
    for (int k = 0; k < 4; k++) begin
      real th = (k + 1) * 3.14159265358979 / 8.0;
      a[k] = bf2r(r2bf(0.125));
      b[k] = bf2r(r2bf(1.0 / (2.0 * $sin(th) * $sin(th))));
    end
    wr32(WA, {r2bf(a[1]), r2bf(a[0])}); wr32(WA + 4, {r2bf(a[3]), r2bf(a[2])});
    wr32(WB, {r2bf(-b[1]), r2bf(-b[0])}); wr32(WB + 4, {r2bf(-b[3]), r2bf(-b[2])});
    // the cores' step 1: x^2
    bg_en = 1;
    for (int i = 0; i < len; i += 2) begin
      for (int k = 0; k < 2; k++) begin
        xs[i + k] = bf2r(r2bf((real'($urandom_range(0, 8000)) - 4000.0) / 1000.0));
        q[k] = r2bf(xs[i + k] * xs[i + k]);
      end
      wr32(IN + 2 * i, {q[1], q[0]});
    end
    bg_en = 0;
    cfg_write(REG_MODE, MODE_SUMEXP);
    cfg_write(REG_A_ADDR, WA);
    cfg_write(REG_B_ADDR, WB);
    cfg_write(REG_NW, 4);
    cfg_write(REG_IN_ADDR, IN);
    cfg_write(REG_OUT_ADDR, OUT);
    cfg_write(REG_LEN, len);
    timed_job();
    $display("sum of exponentials on %0d elements: %0d cycles", len, cyc);
    check(cyc >= 4 * (len / 16) && cyc <= 4 * (len / 16) + 48,
          $sformatf("sum of exponentials took %0d cycles", cyc));
    n_sumexp++;
    max_err = 0.0;
    for (int i = 0; i < len; i += 2) begin
      rd32(OUT + 2 * i, w);
      for (int k = 0; k < 2; k++) begin
        x2 = bf2r(r2bf(xs[i + k] * xs[i + k]));
        ref_s = 0.0;
        for (int j = 0; j < 4; j++) ref_s += a[j] * $exp(-b[j] * x2);
        s = bf2r(k ? w[31:16] : w[15:0]);
        check((s - ref_s < 0.04 * ref_s + 2.0**-12) && (ref_s - s < 0.04 * ref_s + 2.0**-12),
              $sformatf("sum of exp [%0d] got %g expected %g", i + k, s, ref_s));
        // the cores' last step
        y = (xs[i + k] >= 0.0) ? xs[i + k] * (1.0 - s) : xs[i + k] * s;
        err = y - xs[i + k] * phi(xs[i + k]);
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        check(err <= 0.045,
              $sformatf("GELU(%g) = %g, exact %g", xs[i + k], y, xs[i + k] * phi(xs[i + k])));
      end
    end
    $display("GELU on %0d elements: largest absolute error %g", len, max_err);
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    softmax_row(128);
    softmax_row(197);
    softmax_row(512);
    softmax_row(1024);
    softmax_row(2048);
    gelu(1 << 14);
    check(n_softmax == 5 && n_sumexp == 1, "not every workload ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
