// tb_softex: end-to-end test of the SoftEx accelerator on a behavioural
// single-cycle memory with optional random grant stalls.
//   1. softmax of a 40-element vector (partial last beat) with random
//      scores, checked against a real-number softmax (3 % + 1e-4 tolerance);
//   2. softmax of a strictly increasing 64-element vector (a new maximum
//      in every vector: the denominator rescale and its stall must occur);
//   3. sum of exponentials, N_w = 4, 48 elements, checked against
//      sum_i a_i exp(b_i x) (4 % + 2^-12 tolerance), also with an odd
//      number of vectors so the reversed weight order is exercised;
//   4. the same jobs without memory stalls, with the cycle count checked
//      against the streaming rates (softmax: one beat per cycle while
//      accumulating, load/store alternating while normalising; sum of exp:
//      one output vector every N_w cycles).
// Bytes outside the output vector must not be written.
module tb_softex;
  import softex_pkg::*;
  localparam int N = 16;
  localparam int MEM_BEATS = 64;

  logic clk = 0, rst_n = 0;
  logic cfg_req = 0, cfg_gnt, cfg_we = 0, cfg_rvalid;
  logic [31:0] cfg_addr = 0, cfg_wdata = 0, cfg_rdata;
  logic mem_req, mem_gnt, mem_we, mem_rvalid, busy, evt_done;
  logic [31:0] mem_addr;
  logic [N*2-1:0] mem_be;
  logic [N*16-1:0] mem_wdata, mem_rdata;
  logic [15:0] mem [MEM_BEATS*N];
  int checks = 0, failures = 0;
  bit stall_en = 1;
  int last_cycles;

  always #5 clk = ~clk;

  softex dut (.*);

  // behavioural memory: random grant, read data one cycle after grant
  always @(negedge clk) mem_gnt <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  always_ff @(posedge clk) begin
    mem_rvalid <= mem_req && mem_gnt;
    if (mem_req && mem_gnt) begin
      for (int i = 0; i < N; i++) begin
        if (!mem_we) mem_rdata[16*i +: 16] <= mem[mem_addr/2 + i];
        else if (mem_be[2*i]) mem[mem_addr/2 + i] <= mem_wdata[16*i +: 16];
      end
    end
  end

  function automatic real bf2r(input bf16_t v);
    real r;
    if (v[14:7] == 8'd0) return 0.0;
    r = (1.0 + real'(v[6:0]) / 128.0) * (2.0 ** (real'(int'(v[14:7]) - 127)));
    return v[15] ? -r : r;
  endfunction
  function automatic bf16_t r2bf(input real r);   // truncating conversion
    int e; real m; bit s;
    if (r == 0.0) return 16'h0;
    s = (r < 0); if (s) r = -r;
    e = 0; m = r;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 8'(e + 127), 7'($rtoi((m - 1.0) * 128.0))};
  endfunction

  task automatic cfg_write(input int reg_idx, input logic [31:0] v);
    @(negedge clk); cfg_req = 1; cfg_we = 1; cfg_addr = reg_idx * 4; cfg_wdata = v;
    @(negedge clk); cfg_req = 0; cfg_we = 0;
  endtask
  task automatic cfg_read(input int reg_idx, output logic [31:0] v);
    @(negedge clk); cfg_req = 1; cfg_we = 0; cfg_addr = reg_idx * 4;
    @(negedge clk); cfg_req = 0; v = cfg_rdata;
  endtask
  task automatic run_job();
    logic [31:0] c;
    cfg_write(REG_TRIGGER, 1);
    @(posedge evt_done);
    cfg_read(REG_CYCLES, c);
    last_cycles = int'(c);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // softmax of len elements at element 0, output at element 512
  task automatic softmax_test(input int len, input bit increasing);
    real xs [], mx, den, ref_p, got;
    xs = new[len];
    for (int i = 0; i < MEM_BEATS*N; i++) mem[i] = 16'hDEAD;
    for (int i = 0; i < len; i++) begin
      if (increasing) mem[i] = r2bf(-4.0 + 0.125 * i);
      else mem[i] = r2bf((real'($urandom_range(0, 2000)) - 1000.0) / 150.0);
      xs[i] = bf2r(mem[i]);
    end
    mx = xs[0];
    foreach (xs[i]) if (xs[i] > mx) mx = xs[i];
    den = 0.0;
    foreach (xs[i]) den += $exp(xs[i] - mx);
    cfg_write(REG_MODE, MODE_SOFTMAX);
    cfg_write(REG_IN_ADDR, 0);
    cfg_write(REG_OUT_ADDR, 512 * 2);
    cfg_write(REG_LEN, len);
    run_job();
    for (int i = 0; i < len; i++) begin
      ref_p = $exp(xs[i] - mx) / den;
      got = bf2r(mem[512 + i]);
      check((got - ref_p < 0.03 * ref_p + 1e-4) && (ref_p - got < 0.03 * ref_p + 1e-4),
            $sformatf("softmax[%0d] got %g expected %g", i, got, ref_p));
    end
    check(mem[512 + len] == 16'hDEAD, "softmax wrote past the end");
  endtask

  task automatic sumexp_test(input int len);
    real a [4] = '{0.0625, 0.125, 0.1875, 0.125};
    real b [4] = '{-0.25, -0.75, -1.5, -3.0};
    real xv, ref_s, got;
    for (int i = 0; i < MEM_BEATS*N; i++) mem[i] = 16'hDEAD;
    for (int i = 0; i < 4; i++) begin
      mem[64 + i] = r2bf(a[i]);
      mem[96 + i] = r2bf(b[i]);
    end
    for (int i = 0; i < len; i++) mem[128 + i] = r2bf(real'($urandom_range(0, 900)) / 100.0);
    cfg_write(REG_MODE, MODE_SUMEXP);
    cfg_write(REG_A_ADDR, 64 * 2);
    cfg_write(REG_B_ADDR, 96 * 2);
    cfg_write(REG_NW, 4);
    cfg_write(REG_IN_ADDR, 128 * 2);
    cfg_write(REG_OUT_ADDR, 512 * 2);
    cfg_write(REG_LEN, len);
    run_job();
    for (int i = 0; i < len; i++) begin
      xv = bf2r(mem[128 + i]);
      ref_s = 0.0;
      for (int k = 0; k < 4; k++) ref_s += a[k] * $exp(b[k] * xv);
      got = bf2r(mem[512 + i]);
      check((got - ref_s < 0.04 * ref_s + 2.0**-12) && (ref_s - got < 0.04 * ref_s + 2.0**-12),
            $sformatf("sumexp[%0d] x=%f got %g expected %g", i, xv, got, ref_s));
    end
    check(mem[512 + len] == 16'hDEAD, "sumexp wrote past the end");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int beats;
    repeat (3) @(posedge clk);
    rst_n = 1;
    softmax_test(40, 0);
    softmax_test(64, 1);
    check(dut.u_dp.rescale_cnt > 0, "no denominator rescale happened");
    check(dut.u_dp.den_stall_cnt > 0, "no denominator stall happened");
    $display("rescales %0d, stall cycles %0d", dut.u_dp.rescale_cnt, dut.u_dp.den_stall_cnt);
    sumexp_test(48);
    sumexp_test(37);
    stall_en = 0;
    softmax_test(256, 0);
    beats = 256 / N;
    $display("softmax 256: %0d cycles", last_cycles);
    check(last_cycles <= 3 * beats + 40, $sformatf("softmax too slow: %0d cycles", last_cycles));
    sumexp_test(256);
    $display("sumexp 256: %0d cycles", last_cycles);
    check(last_cycles >= beats * 4 && last_cycles <= beats * 4 + 30,
          $sformatf("sum of exp rate wrong: %0d cycles", last_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
