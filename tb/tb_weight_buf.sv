// tb_weight_buf: loads random weight beats, reads several passes with a
// random number of weights nw and random gaps, and checks the ping-pong
// order (forward, then backward, ...) and the last flag of each pass.
module tb_weight_buf;
  import softex_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, load = 0, restart = 0, next = 0;
  bf16_t load_data [N];
  logic [$clog2(N):0] nw;
  bf16_t w;
  logic last;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_buf #(.N(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bf16_t mem [N];
    int idx, exp_i;
    for (int i = 0; i < N; i++) load_data[i] = 0;
    nw = 1;
    @(negedge clk); rst_n = 1;
    for (int job = 0; job < 40; job++) begin
      for (int i = 0; i < N; i++) begin mem[i] = 16'($urandom); load_data[i] = mem[i]; end
      nw = $urandom_range(1, N);
      load = 1; restart = 1; @(negedge clk); load = 0; restart = 0;
      for (int pass = 0; pass < 5; pass++)
        for (int k = 0; k < nw; k++) begin
          exp_i = (pass % 2 == 0) ? k : nw - 1 - k;
          #1;
          checks++;
          if (w !== mem[exp_i] || last !== (k == nw - 1)) begin
            failures++;
            $display("FAIL nw=%0d pass %0d k %0d: w %h exp %h last %b", nw, pass, k, w, mem[exp_i], last);
          end
          if ($urandom_range(0, 3) == 0) @(negedge clk);  // idle cycle
          next = 1; @(negedge clk); next = 0;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
