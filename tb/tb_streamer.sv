// tb_streamer: the streamer against a memory model whose grant is random
// (bank conflicts). A source command reads a vector of random length and
// the out stream (random ready) must deliver its beats in order with the
// lane mask of the partial last beat; at the same time a sink command
// writes a random in stream, which must land at the target beats with
// untouched memory beyond the last element. With the grant always high and
// the consumer always ready, a read of B beats must finish in B + 4 cycles
// (one beat per cycle).
module tb_streamer;
  import softex_pkg::*;
  localparam int N = 16, MEM_BEATS = 256;
  logic clk = 0, rst_n = 0;
  logic src_start = 0, src_done, src_empty, snk_start = 0, snk_done;
  logic [31:0] src_addr = 0, src_len = 0, snk_addr = 0, snk_len = 0;
  logic out_valid, out_ready = 0, in_valid = 0, in_ready;
  logic [N*16-1:0] out_data, in_data = 0;
  logic [N-1:0] out_mask, in_mask = 0;
  logic mem_req, mem_gnt = 0, mem_we, mem_rvalid = 0;
  logic [31:0] mem_addr;
  logic [N*2-1:0] mem_be;
  logic [N*16-1:0] mem_wdata, mem_rdata = 0;
  logic [15:0] mem [MEM_BEATS*N];
  bit full_speed = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  softex_streamer #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    mem_gnt   <= full_speed ? 1'b1 : ($urandom_range(0, 2) != 0);
    out_ready <= full_speed ? 1'b1 : ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) begin
    mem_rvalid <= mem_req && mem_gnt && !mem_we;
    if (mem_req && mem_gnt)
      for (int i = 0; i < N; i++) begin
        if (!mem_we) mem_rdata[16*i +: 16] <= mem[mem_addr/2 + i];
        else if (mem_be[2*i]) mem[mem_addr/2 + i] <= mem_wdata[16*i +: 16];
      end
  end

  // out stream checker
  int exp_beat = 0, rd_len = 0, rd_base = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    for (int i = 0; i < N; i++) begin
      automatic int e = exp_beat * N + i;
      chk(out_mask[i] == (e < rd_len), $sformatf("mask beat %0d lane %0d", exp_beat, i));
      if (e < rd_len) chk(out_data[16*i +: 16] == mem[rd_base + e],
                          $sformatf("read data beat %0d lane %0d", exp_beat, i));
    end
    exp_beat++;
  end

  // in stream driver: random data, beats counted by the sink
  int wr_beat = 0, wr_len = 0;
  logic [15:0] wr_vals [MEM_BEATS*N];
  always @(posedge clk) if (in_valid && in_ready) wr_beat <= wr_beat + 1;
  always @(negedge clk) begin
    // valid is held until the beat is taken
    if (!in_valid || wr_beat * N >= wr_len)
      in_valid = (wr_beat * N < wr_len) && ($urandom_range(0, 3) != 0);
    for (int i = 0; i < N; i++) begin
      in_data[16*i +: 16] = wr_vals[wr_beat * N + i];
      in_mask[i] = (wr_beat * N + i < wr_len);
    end
  end

  initial begin
    int nb, t, wbase;
    for (int i = 0; i < MEM_BEATS*N; i++) mem[i] = 16'($urandom);
    @(negedge clk); rst_n = 1;
    for (int job = 0; job < 30; job++) begin
      rd_len = $urandom_range(1, 60 * N); rd_base = $urandom_range(0, 40) * N;
      wr_len = $urandom_range(1, 60 * N); wbase = (128 + $urandom_range(0, 40)) * N;
      for (int i = 0; i < MEM_BEATS*N; i++) wr_vals[i] = 16'($urandom);
      for (int i = wbase; i < MEM_BEATS*N; i++) mem[i] = 16'hDEAD;
      exp_beat = 0; wr_beat = 0;
      src_addr = rd_base * 2; src_len = rd_len; snk_addr = wbase * 2; snk_len = wr_len;
      src_start = 1; snk_start = 1; @(negedge clk); src_start = 0; snk_start = 0;
      t = 0;
      while (!(src_done && snk_done && exp_beat * N >= rd_len) && t < 20000) begin @(negedge clk); t++; end
      chk(exp_beat == (rd_len + N - 1) / N, $sformatf("%0d beats read", exp_beat));
      for (int i = 0; i < wr_len; i++)
        chk(mem[wbase + i] == wr_vals[i], $sformatf("written element %0d", i));
      chk(mem[wbase + wr_len] == 16'hDEAD, "write past the end");
    end
    // rate: one beat per cycle
    full_speed = 1; wr_len = 0;
    repeat (2) @(negedge clk);
    for (int job = 0; job < 4; job++) begin
      rd_len = 32 * N * (job + 1); rd_base = 0; exp_beat = 0; nb = rd_len / N;
      src_addr = 0; src_len = rd_len;
      src_start = 1; @(negedge clk); src_start = 0;
      t = 1;
      while (exp_beat < nb && t < 10000) begin @(negedge clk); t++; end
      chk(t <= nb + 4, $sformatf("read of %0d beats took %0d cycles", nb, t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
