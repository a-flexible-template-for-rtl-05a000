// tb_stream_fifo: random producer and consumer around the FIFO; data must
// come out in order and complete, count must follow the occupancy, in_ready
// must drop only when DEPTH entries are held, and a full FIFO must accept
// and deliver one item per cycle when both sides are ready (throughput).
module tb_stream_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [W-1:0] q [$];
  int sent = 0, rcvd = 0, phase = 0;
  always @(negedge clk) if (rst_n) begin
    // check the state settled after the last posedge
    checks++;
    if (count != q.size() || in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
      failures++; $display("FAIL count %0d model %0d ready %b valid %b", count, q.size(), in_ready, out_valid);
    end
    in_valid = (phase == 1) ? 1'b1 : ($urandom_range(0, 2) != 0);
    out_ready = (phase == 1) ? 1'b1 : ($urandom_range(0, 1) != 0);
    in_data = W'(sent);
  end
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != q[0]) begin failures++; $display("FAIL data %h vs %h", out_data, q[0]); end
      void'(q.pop_front()); rcvd++;
    end
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
  end

  initial begin
    int s0;
    @(negedge clk); rst_n = 1;
    repeat (3000) @(negedge clk);
    // throughput: both sides always ready for 100 cycles -> 100 transfers
    phase = 1; @(negedge clk); s0 = rcvd;
    repeat (100) @(negedge clk);
    checks++;
    if (rcvd - s0 != 100) begin failures++; $display("FAIL throughput %0d/100", rcvd - s0); end
    phase = 0;
    repeat (100) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
