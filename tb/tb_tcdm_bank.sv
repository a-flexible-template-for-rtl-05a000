// tb_tcdm_bank: random writes with random byte enables and random reads
// against an array model; read data must appear exactly one cycle after
// the request.
module tb_tcdm_bank;
  localparam int WORDS = 2048;
  logic clk = 0, req = 0, we = 0;
  logic [3:0] be = 0;
  logic [$clog2(WORDS)-1:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tcdm_bank #(.WORDS(WORDS)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] m [WORDS];
    logic [31:0] expv;
    for (int i = 0; i < WORDS; i++) begin
      m[i] = $urandom; req = 1; we = 1; be = 4'hf; addr = i; wdata = m[i]; @(negedge clk);
    end
    for (int t = 0; t < 20000; t++) begin
      addr = $urandom_range(0, WORDS - 1);
      we = $urandom_range(0, 1); be = $urandom; wdata = $urandom; req = 1;
      expv = m[addr];
      if (we) for (int b = 0; b < 4; b++) if (be[b]) m[addr][b*8 +: 8] = wdata[b*8 +: 8];
      @(negedge clk);
      if (!we) begin
        checks++;
        if (rdata != expv) begin failures++; $display("FAIL addr %0d: %h vs %h", addr, rdata, expv); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
