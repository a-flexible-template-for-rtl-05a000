// tb_max_unit: random vectors (random lane masks) are fed to the max unit;
// new_max, the update flag and curr_max - new_max are compared with a
// real-number model of the running maximum; clear must restart it.
module tb_max_unit;
  import softex_pkg::*;
  import tb_bf16_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, update = 0;
  bf16_t x [N];
  logic [N-1:0] mask = '0;
  bf16_t new_max, curr_max, diff;
  logic upd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  max_unit #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real rmax, vmax, d;
    bit first;
    for (int i = 0; i < N; i++) x[i] = 0;
    @(negedge clk); rst_n = 1;
    for (int job = 0; job < 20; job++) begin
      clear = 1; @(negedge clk); clear = 0;
      first = 1; rmax = -1.0e30;
      for (int v = 0; v < 10; v++) begin
        mask = (v == 9) ? N'((1 << $urandom_range(1, N - 1)) - 1) : '1;
        for (int i = 0; i < N; i++) x[i] = rnd_bf(10.0 + v);
        vmax = rmax;
        for (int i = 0; i < N; i++) if (mask[i] && bf2r(x[i]) > vmax) vmax = bf2r(x[i]);
        update = 1; #1;
        chk(bf2r(new_max) == vmax, $sformatf("new_max %g vs %g", bf2r(new_max), vmax));
        chk(upd == (!first && vmax > rmax), "upd flag");
        if (!first && vmax > rmax) begin
          d = rmax - vmax;
          chk(rabs(bf2r(diff) - d) <= rabs(d) * (2.0 ** -8) * 1.0001, "diff");
        end
        @(negedge clk); update = 0;
        chk(bf2r(curr_max) == vmax, "curr_max register");
        rmax = vmax; first = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
