// tb_softex_datapath: the datapath without controller and streamer. The
// testbench plays both: it drives the input stream (valid held until
// taken, random gaps), the phase and den_finish, and consumes the output
// stream with a random ready.
//   softmax : accumulation pass over a random vector (with increasing
//             blocks so that the maximum grows and the denominator is
//             rescaled), den_finish until den_done, normalisation pass;
//             outputs checked against exp(x - max) / sum within 3%.
//   sum-exp : a, b weight beats, then x beats; outputs checked against
//             sum_i a_i exp(b_i x) within 4%.
// Rates (gaps and stalls off): accumulation and normalisation one vector
// per cycle, sum-exp one vector every N_w cycles, each within a few cycles
// of pipeline fill.
module tb_softex_datapath;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  localparam int N = 16, MAXB = 64;
  logic clk = 0, rst_n = 0, clear = 0, den_finish = 0, den_done, empty;
  softex_phase_e phase = PH_IDLE;
  logic [$clog2(N):0] nw = 4;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N*16-1:0] in_data = 0, out_data;
  logic [N-1:0] in_mask = 0, out_mask;
  logic [31:0] rescale_cnt, den_stall_cnt;
  int checks = 0, failures = 0;
  bit fast = 0;
  always #5 clk = ~clk;
  softex_datapath #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // input stream from a beat list
  logic [N*16-1:0] beats [MAXB];
  logic [N-1:0]    masks [MAXB];
  int n_in = 0, sent = 0;
  always @(posedge clk) if (in_valid && in_ready) sent <= sent + 1;
  always @(negedge clk) begin
    if (!in_valid || sent >= n_in) in_valid = (sent < n_in) && (fast || $urandom_range(0, 3) != 0);
    if (sent < n_in) begin in_data = beats[sent]; in_mask = masks[sent]; end
    out_ready = fast || ($urandom_range(0, 3) != 0);
  end
  // output collection
  logic [N*16-1:0] outs [MAXB];
  int n_out = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    if (n_out < MAXB) outs[n_out] = out_data;
    n_out++;
    chk(out_mask == masks[n_out - 1 + ((phase == PH_SUMEXP) ? 2 : 0)], "output mask");
  end

  task automatic stream(input int nb, output int cyc);
    sent = 0; n_in = nb; cyc = 0;
    while (sent < nb) begin @(negedge clk); cyc++; end
  endtask

  task automatic softmax(input int len, input bit incr);
    real xs [MAXB*N], mx, den, p;
    int nb, cyc, r0;
    nb = (len + N - 1) / N;
    foreach (xs[i]) xs[i] = 0;
    for (int i = 0; i < nb * N; i++) begin
      logic [15:0] v = incr ? r2bf(-6.0 + 0.25 * (i / N) + 0.01 * (i % N))
                            : r2bf((real'($urandom_range(0, 2000)) - 1000.0) / 150.0);
      beats[i / N][16*(i % N) +: 16] = v;
      masks[i / N][i % N] = (i < len);
      if (i < len) xs[i] = bf2r(v);
    end
    mx = -1e30; den = 0.0;
    for (int i = 0; i < len; i++) if (xs[i] > mx) mx = xs[i];
    for (int i = 0; i < len; i++) den += $exp(xs[i] - mx);
    clear = 1; @(negedge clk); clear = 0;
    r0 = rescale_cnt;
    phase = PH_ACCUM; stream(nb, cyc);
    // one vector per cycle, plus up to FMA_STAGES stall cycles per rescale
    if (fast) chk(cyc <= nb + 1 + 3 * (rescale_cnt - r0),
                  $sformatf("accumulation of %0d vectors, %0d rescales took %0d cycles",
                            nb, rescale_cnt - r0, cyc));
    while (!empty) @(negedge clk);
    den_finish = 1;
    cyc = 0;
    while (!den_done) begin @(negedge clk); cyc++; end
    chk(cyc < 40, $sformatf("denominator and reciprocal took %0d cycles", cyc));
    den_finish = 0;
    if (incr) chk(rescale_cnt - r0 == nb - 1, $sformatf("%0d rescales for %0d blocks", rescale_cnt - r0, nb));
    phase = PH_NORM; n_out = 0; stream(nb, cyc);
    while (n_out < nb) begin @(negedge clk); cyc++; end
    if (fast) chk(cyc <= nb + 4, $sformatf("normalisation of %0d vectors took %0d cycles", nb, cyc));
    while (!empty) @(negedge clk);
    phase = PH_IDLE;
    for (int i = 0; i < len; i++) begin
      real got = bf2r(outs[i / N][16*(i % N) +: 16]);
      p = $exp(xs[i] - mx) / den;
      chk(rabs(got - p) <= 0.03 * p + 1e-4, $sformatf("softmax %0d: %g vs %g", i, got, p));
    end
  endtask

  task automatic sumexp(input int len, input int nwv);
    real xs [MAXB*N], a [N], b [N], s;
    int nb, cyc;
    nb = (len + N - 1) / N;
    nw = nwv;
    for (int k = 0; k < N; k++) begin
      a[k] = (k < nwv) ? real'($urandom_range(0, 1000)) / (16000.0) : 0.0;
      b[k] = (k < nwv) ? -real'($urandom_range(50, 3000)) / 1000.0 : 0.0;
      beats[0][16*k +: 16] = r2bf(a[k]); a[k] = bf2r(r2bf(a[k]));
      beats[1][16*k +: 16] = r2bf(b[k]); b[k] = bf2r(r2bf(b[k]));
    end
    masks[0] = '1; masks[1] = '1;
    for (int i = 0; i < nb * N; i++) begin
      logic [15:0] v = r2bf(real'($urandom_range(0, 900)) / 100.0);
      beats[2 + i / N][16*(i % N) +: 16] = v;
      masks[2 + i / N][i % N] = (i < len);
      xs[i] = bf2r(v);
    end
    clear = 1; @(negedge clk); clear = 0;
    phase = PH_SUMEXP; n_out = 0; stream(nb + 2, cyc);
    while (n_out < nb) begin @(negedge clk); cyc++; end
    if (fast) chk(cyc <= 2 + nb * nwv + 4 && cyc >= nb * nwv,
                  $sformatf("sum-exp of %0d vectors, %0d weights took %0d cycles", nb, nwv, cyc));
    while (!empty) @(negedge clk);
    phase = PH_IDLE;
    for (int i = 0; i < len; i++) begin
      real got = bf2r(outs[i / N][16*(i % N) +: 16]);
      s = 0.0;
      for (int k = 0; k < nwv; k++) s += a[k] * $exp(bf2r(r2bf_rne(b[k] * xs[i])));
      chk(rabs(got - s) <= 0.04 * s + nwv * (2.0 ** -13), $sformatf("sumexp %0d: %g vs %g", i, got, s));
    end
  endtask

  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      softmax($urandom_range(1, MAXB * N), 0);
      softmax($urandom_range(N + 1, 8 * N), 1);
      sumexp($urandom_range(1, (MAXB - 2) * N), $urandom_range(1, N));
    end
    fast = 1;
    softmax(40 * N, 0);
    sumexp(20 * N, 4);
    sumexp(10 * N, 1);
    $display("rescales %0d, denominator stall cycles %0d", rescale_cnt, den_stall_cnt);
    chk(den_stall_cnt > 0, "the denominator rescale never stalled the input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
