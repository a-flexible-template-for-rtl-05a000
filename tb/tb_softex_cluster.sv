// tb_softex_cluster: end-to-end test of the cluster memory system with
// SoftEx, at the default sizes (8 core ports, 32 banks x 8 KiB, 16 lanes).
// The testbench plays the cores: core port 0 writes the input data into
// the TCDM and reads the results back, the control target programs SoftEx.
// While SoftEx runs, core ports 4..7 and the tensor engine port issue
// random background reads, so SoftEx loses banks to the cores (wide-port
// conflict) and the TCDM arbiter is contested.
//   job 1: softmax of a 256-element random vector        (3 % tolerance)
//   job 2: softmax of a 96-element increasing vector     (rescale + stall)
//   job 3: sum of exponentials, N_w = 4, 200 elements    (partial beat,
//          odd number of vectors: reversed weight order)
// Every mechanism must occur at least once; each one that never does is
// a failure.
module tb_softex_cluster;
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

  localparam int IN = 32'h0_1000, OUT = 32'h0_4000, WA = 32'h0_0800, WB = 32'h0_0840;

  task automatic softmax_job(input int len, input bit increasing);
    real xs [], mx, den, ref_p, got;
    bf16_t v;
    xs = new[len];
    for (int i = 0; i < len; i++) begin
      v = increasing ? r2bf(-6.0 + 0.0625 * i)
                     : r2bf((real'($urandom_range(0, 2000)) - 1000.0) / 120.0);
      wr16(IN + 2 * i, v);
      xs[i] = bf2r(v);
    end
    mx = xs[0];
    foreach (xs[i]) if (xs[i] > mx) mx = xs[i];
    den = 0.0;
    foreach (xs[i]) den += $exp(xs[i] - mx);
    cfg_write(REG_MODE, MODE_SOFTMAX);
    cfg_write(REG_IN_ADDR, IN);
    cfg_write(REG_OUT_ADDR, OUT);
    cfg_write(REG_LEN, len);
    run_job();
    n_softmax++;
    for (int i = 0; i < len; i++) begin
      rd16(OUT + 2 * i, v);
      ref_p = $exp(xs[i] - mx) / den;
      got = bf2r(v);
      check((got - ref_p < 0.03 * ref_p + 1e-4) && (ref_p - got < 0.03 * ref_p + 1e-4),
            $sformatf("softmax[%0d] got %g expected %g", i, got, ref_p));
    end
  endtask

  task automatic sumexp_job(input int len);
    real a [4] = '{0.0625, 0.125, 0.1875, 0.125};
    real b [4] = '{-0.25, -0.75, -1.5, -3.0};
    real xs [], ref_s, got;
    bf16_t v;
    xs = new[len];
    for (int k = 0; k < 4; k++) begin
      wr16(WA + 2 * k, r2bf(a[k]));
      wr16(WB + 2 * k, r2bf(b[k]));
    end
    for (int i = 0; i < len; i++) begin
      v = r2bf(real'($urandom_range(0, 900)) / 100.0);
      wr16(IN + 2 * i, v);
      xs[i] = bf2r(v);
    end
    wr16(OUT + 2 * len, 16'hBEEF);
    cfg_write(REG_MODE, MODE_SUMEXP);
    cfg_write(REG_A_ADDR, WA);
    cfg_write(REG_B_ADDR, WB);
    cfg_write(REG_NW, 4);
    cfg_write(REG_IN_ADDR, IN);
    cfg_write(REG_OUT_ADDR, OUT);
    cfg_write(REG_LEN, len);
    run_job();
    n_sumexp++;
    for (int i = 0; i < len; i++) begin
      rd16(OUT + 2 * i, v);
      ref_s = 0.0;
      for (int k = 0; k < 4; k++) ref_s += a[k] * $exp(b[k] * xs[i]);
      got = bf2r(v);
      check((got - ref_s < 0.04 * ref_s + 2.0**-12) && (ref_s - got < 0.04 * ref_s + 2.0**-12),
            $sformatf("sumexp[%0d] got %g expected %g", i, got, ref_s));
    end
    rd16(OUT + 2 * len, v);
    check(v == 16'hBEEF, "sum of exp wrote past the end of the vector");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    softmax_job(256, 0);
    softmax_job(96, 1);
    sumexp_job(200);
    $display("softmax jobs %0d, sum-of-exp jobs %0d", n_softmax, n_sumexp);
    $display("denominator rescales %0d, denominator stall cycles %0d",
             dut.u_softex.u_dp.rescale_cnt, dut.u_softex.u_dp.den_stall_cnt);
    $display("wide-port bank conflicts %0d, TCDM arbiter contested cycles %0d",
             dut.u_xbar.conflict_cnt, dut.u_arb.contend_cnt);
    check(n_softmax > 0, "softmax mode never ran");
    check(n_sumexp > 0, "sum-of-exponentials mode never ran");
    check(dut.u_softex.u_dp.rescale_cnt > 0, "denominator rescale never happened");
    check(dut.u_softex.u_dp.den_stall_cnt > 0, "denominator FIFO stall never happened");
    check(dut.u_xbar.conflict_cnt > 0, "SoftEx never lost a bank to a core");
    check(dut.u_arb.contend_cnt > 0, "TCDM arbiter never contested");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
