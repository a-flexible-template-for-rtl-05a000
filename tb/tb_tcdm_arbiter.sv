// tb_tcdm_arbiter: the TPE / SoftEx arbiter in front of a simple wide
// memory model with a random grant. Both initiators issue random reads and
// writes (held until granted). Checks: at most one initiator granted per
// cycle, the forwarded address / write data / word-valid mask of the
// granted one (SoftEx only marks its SW low words), read data steered back
// to the initiator that was granted, alternation when both request (no
// initiator waits for more than two contested grants), and the rate: a
// single initiator with the port always granted moves one beat per cycle.
module tb_tcdm_arbiter;
  localparam int WW = 16, SW = 8;
  logic clk = 0, rst_n = 0;
  logic t_req = 0, t_gnt, t_we = 0, t_rvalid, s_req = 0, s_gnt, s_we = 0, s_rvalid;
  logic [31:0] t_addr = 0, s_addr = 0, w_addr;
  logic [WW*4-1:0] t_be = 0, w_be;
  logic [SW*4-1:0] s_be = 0;
  logic [WW*32-1:0] t_wdata = 0, t_rdata, w_wdata, w_rdata = 0;
  logic [SW*32-1:0] s_wdata = 0, s_rdata;
  logic w_req, w_gnt = 0, w_we, w_rvalid = 0;
  logic [WW-1:0] w_wvalid;
  logic [31:0] contend_cnt;
  int checks = 0, failures = 0;
  bit always_gnt = 0;
  always #5 clk = ~clk;
  tcdm_arbiter #(.WW(WW), .SW(SW)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory model: read data is a function of the address
  function automatic logic [WW*32-1:0] rd_of(input logic [31:0] a);
    logic [WW*32-1:0] v;
    for (int i = 0; i < WW; i++) v[32*i +: 32] = a * 7 + i;
    return v;
  endfunction
  always @(negedge clk) w_gnt <= always_gnt || ($urandom_range(0, 2) != 0);
  logic t_pend = 0, s_pend = 0;
  logic [31:0] t_pa, s_pa;
  int t_wait = 0, s_wait = 0, max_wait = 0, t_beats = 0;
  always @(posedge clk) if (rst_n) begin
    w_rvalid <= w_req && w_gnt;
    w_rdata  <= rd_of(w_addr);
    chk(!(t_gnt && s_gnt), "both granted");
    chk(!(t_gnt || s_gnt) || w_gnt, "grant without the port grant");
    if (t_req && t_gnt) begin
      chk(w_addr == t_addr && w_we == t_we && w_wvalid == '1 && w_be == t_be &&
          (!t_we || w_wdata == t_wdata), "TPE request forwarded");
      t_beats++;
    end
    if (s_req && s_gnt) begin
      chk(w_addr == s_addr && w_we == s_we && w_wvalid == WW'((1 << SW) - 1) &&
          w_be[SW*4-1:0] == s_be && (!s_we || w_wdata[SW*32-1:0] == s_wdata),
          "SoftEx request forwarded");
    end
    t_pend <= t_req && t_gnt && !t_we; t_pa <= t_addr;
    s_pend <= s_req && s_gnt && !s_we; s_pa <= s_addr;
    t_wait = (t_req && !t_gnt && w_gnt) ? t_wait + 1 : 0;
    s_wait = (s_req && !s_gnt && w_gnt) ? s_wait + 1 : 0;
    if (t_wait > max_wait) max_wait = t_wait;
    if (s_wait > max_wait) max_wait = s_wait;
  end
  always @(negedge clk) if (rst_n) begin
    if (t_pend) chk(t_rvalid && !s_rvalid && t_rdata == rd_of(t_pa), "TPE read data");
    if (s_pend) chk(s_rvalid && !t_rvalid && s_rdata == rd_of(s_pa)[SW*32-1:0], "SoftEx read data");
  end

  // stimulus
  logic t_done = 0, s_done = 0;
  int s_on = 1;
  always @(posedge clk) begin t_done <= t_req && t_gnt; s_done <= s_req && s_gnt; end
  always @(negedge clk) if (rst_n) begin
    if (!t_req || t_done) begin
      t_req = always_gnt || $urandom_range(0, 3) != 0; t_we = $urandom_range(0, 1);
      t_addr = $urandom & ~32'h3f; t_be = {$urandom, $urandom};
      for (int i = 0; i < WW; i++) t_wdata[32*i +: 32] = $urandom;
    end
    if (!s_req || s_done) begin
      s_req = s_on && ($urandom_range(0, 3) != 0); s_we = $urandom_range(0, 1);
      s_addr = $urandom & ~32'h1f; s_be = $urandom;
      for (int i = 0; i < SW; i++) s_wdata[32*i +: 32] = $urandom;
    end
  end

  initial begin
    int b0;
    @(negedge clk); rst_n = 1;
    repeat (5000) @(negedge clk);
    chk(max_wait <= 2, $sformatf("longest wait with the port granted: %0d", max_wait));
    chk(contend_cnt > 0, "no contested cycle");
    $display("contested cycles %0d, longest wait %0d", contend_cnt, max_wait);
    s_on = 0; always_gnt = 1;
    repeat (5) @(negedge clk);
    b0 = t_beats;
    repeat (100) @(negedge clk);
    chk(t_beats - b0 == 100, $sformatf("lone TPE moved %0d beats in 100 cycles", t_beats - b0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
