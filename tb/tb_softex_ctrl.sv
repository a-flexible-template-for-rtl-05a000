// tb_softex_ctrl: the controller alone, with small models of the streamer
// and datapath status lines (done / empty flags that follow a command
// after a random number of cycles). Checks: register write and read-back
// with the one-cycle read latency, that configuration writes are ignored
// while busy, STATUS, the order and the operands of the commands of a
// softmax job (read pass, denominator finish, read + write pass) and of a
// sum-of-exponentials job (a weights, b weights, read + write pass), the
// phase seen by the datapath, one evt_done pulse per job and the CYCLES
// register against the cycles counted here.
module tb_softex_ctrl;
  import softex_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic cfg_req = 0, cfg_gnt, cfg_we = 0, cfg_rvalid;
  logic [31:0] cfg_addr = 0, cfg_wdata = 0, cfg_rdata;
  logic clear, den_finish, den_done = 0, dp_empty = 1;
  softex_phase_e phase;
  logic [$clog2(N):0] nw;
  logic src_start, src_done = 1, src_empty = 1, snk_start, snk_done = 1;
  logic [31:0] src_addr, src_len, snk_addr, snk_len;
  logic busy, evt_done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  softex_ctrl #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // command log and responder models
  string log_s [$];
  int src_t = 0, snk_t = 0, den_t = 0, evts = 0;
  always @(posedge clk) if (rst_n) begin
    if (src_start) begin
      log_s.push_back($sformatf("src %0d %0d %0d", src_addr, src_len, phase));
      src_done <= 0; src_empty <= 0; dp_empty <= 0; src_t <= $urandom_range(2, 30);
    end else if (src_t > 0) begin
      src_t <= src_t - 1;
      if (src_t == 1) begin src_done <= 1; src_empty <= 1; dp_empty <= 1; end
    end
    if (snk_start) begin
      log_s.push_back($sformatf("snk %0d %0d %0d", snk_addr, snk_len, phase));
      snk_done <= 0; snk_t <= $urandom_range(5, 40);
    end else if (snk_t > 0) begin
      snk_t <= snk_t - 1;
      if (snk_t == 1) snk_done <= 1;
    end
    if (clear) den_done <= 0;
    else if (den_finish && !den_done) begin
      if (den_t == 0) log_s.push_back("fin");
      den_t <= den_t + 1;
      if (den_t == 6) begin den_done <= 1; den_t <= 0; end
    end
    if (evt_done) evts++;
  end

  task automatic cfg_write(input int r, input logic [31:0] v);
    cfg_req = 1; cfg_we = 1; cfg_addr = 32'(r * 4); cfg_wdata = v;
    @(negedge clk); cfg_req = 0; cfg_we = 0;
  endtask
  task automatic cfg_read(input int r, output logic [31:0] v);
    cfg_req = 1; cfg_we = 0; cfg_addr = 32'(r * 4);
    @(negedge clk); cfg_req = 0;
    chk(cfg_rvalid, "rvalid one cycle after the read");
    v = cfg_rdata;
  endtask

  initial begin
    logic [31:0] v, vals [NUM_REGS];
    int cyc, e0;
    string expect_s [$];
    @(negedge clk); rst_n = 1;
    // registers
    for (int r = REG_IN_ADDR; r <= REG_NW; r++) begin vals[r] = $urandom; cfg_write(r, vals[r]); end
    for (int r = REG_IN_ADDR; r <= REG_NW; r++) begin
      cfg_read(r, v); chk(v == vals[r], $sformatf("register %0d read-back", r));
    end
    for (int job = 0; job < 12; job++) begin
      int mode = job % 2, len = $urandom_range(1, 5000), nwv = $urandom_range(1, N);
      int ia = $urandom_range(0, 4095) * 32, oa = $urandom_range(0, 4095) * 32;
      int aa = $urandom_range(0, 4095) * 32, ba = $urandom_range(0, 4095) * 32;
      cfg_write(REG_IN_ADDR, ia); cfg_write(REG_OUT_ADDR, oa); cfg_write(REG_LEN, len);
      cfg_write(REG_MODE, mode); cfg_write(REG_A_ADDR, aa); cfg_write(REG_B_ADDR, ba);
      cfg_write(REG_NW, nwv);
      chk(nw == nwv, "nw output");
      log_s.delete(); expect_s.delete();
      if (mode == MODE_SOFTMAX) begin
        expect_s.push_back($sformatf("src %0d %0d %0d", ia, len, PH_ACCUM));
        expect_s.push_back("fin");
        expect_s.push_back($sformatf("src %0d %0d %0d", ia, len, PH_NORM));
        expect_s.push_back($sformatf("snk %0d %0d %0d", oa, len, PH_NORM));
      end else begin
        expect_s.push_back($sformatf("src %0d %0d %0d", aa, nwv, PH_SUMEXP));
        expect_s.push_back($sformatf("src %0d %0d %0d", ba, nwv, PH_SUMEXP));
        expect_s.push_back($sformatf("src %0d %0d %0d", ia, len, PH_SUMEXP));
        expect_s.push_back($sformatf("snk %0d %0d %0d", oa, len, PH_SUMEXP));
      end
      e0 = evts;
      cfg_req = 1; cfg_we = 1; cfg_addr = REG_TRIGGER * 4; #1;
      chk(clear, "clear with the trigger");
      @(negedge clk); cfg_req = 0; cfg_we = 0;
      cyc = 1;
      chk(busy, "busy after trigger");
      cfg_write(REG_LEN, 7); cyc++;           // must be ignored while busy
      while (!evt_done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      chk(!busy, "idle after evt_done");
      chk(evts - e0 == 1, "one evt_done pulse");
      cfg_read(REG_LEN, v); chk(v == len, "write while busy ignored");
      cfg_read(REG_STATUS, v); chk(v == 0, "STATUS idle");
      cfg_read(REG_CYCLES, v);
      chk(v == cyc - 1, $sformatf("CYCLES %0d counted %0d", v, cyc - 1));
      chk(log_s.size() == expect_s.size(), $sformatf("%0d commands", log_s.size()));
      foreach (expect_s[i]) if (i < log_s.size())
        chk(log_s[i] == expect_s[i], $sformatf("command %0d: '%s' expected '%s'", i, log_s[i], expect_s[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
