// tb_tcdm_xbar: the interconnect with its 32 banks under random traffic.
// Twelve narrow masters and the wide port issue random reads and writes
// (requests held until granted); a word-level memory model is updated at
// every grant. Checks: read data of every granted read one cycle later,
// final memory contents, no bank granted to two initiators in one cycle,
// the wide beat granted whole, a bounded wait for every initiator
// (round robin / alternating priority), and the rate: masters on distinct
// banks are all granted in the same cycle, and the wide port alone moves
// one beat per cycle.
module tb_tcdm_xbar;
  localparam int NM = 12, WW = 16, NB = 32, BW = 256;
  localparam int WORDS = NB * BW;
  logic clk = 0, rst_n = 0;
  logic [NM-1:0] n_req = 0, n_gnt, n_we = 0, n_rvalid;
  logic [31:0] n_addr [NM], n_wdata [NM], n_rdata [NM];
  logic [3:0] n_be [NM];
  logic w_req = 0, w_gnt, w_we = 0, w_rvalid;
  logic [31:0] w_addr = 0;
  logic [WW-1:0] w_wvalid = 0;
  logic [WW*4-1:0] w_be = 0;
  logic [WW*32-1:0] w_wdata = 0, w_rdata;
  logic [NB-1:0] b_req, b_we;
  logic [3:0] b_be [NB];
  logic [$clog2(BW)-1:0] b_addr [NB];
  logic [31:0] b_wdata [NB], b_rdata [NB];
  logic [31:0] conflict_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tcdm_xbar #(.NM(NM), .WW(WW), .NB(NB), .BANK_WORDS(BW)) dut (.*);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(BW)) u_bank (.clk, .req(b_req[b]), .we(b_we[b]), .be(b_be[b]),
      .addr(b_addr[b]), .wdata(b_wdata[b]), .rdata(b_rdata[b]));
  end

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] model [WORDS];
  logic [31:0] n_exp [NM];
  logic [WW*32-1:0] w_exp;
  logic [NM-1:0] n_chk = 0;
  logic [WW-1:0] w_chk = 0;
  int n_wait [NM], w_wait = 0, max_wait = 0, mode = 4;

  function automatic logic [31:0] merge(input logic [31:0] o, input logic [31:0] d, input logic [3:0] be);
    for (int k = 0; k < 4; k++) if (be[k]) o[8*k +: 8] = d[8*k +: 8];
    return o;
  endfunction

  // grants: model update, bank exclusivity
  always @(posedge clk) if (rst_n) begin
    automatic logic [NB-1:0] used = '0;
    automatic bit clash = 0;
    n_chk <= '0; w_chk <= '0;
    if (w_req && w_gnt) begin
      for (int i = 0; i < WW; i++) if (w_wvalid[i]) begin
        automatic int a = (w_addr / 4 + i) % WORDS;
        if (used[a % NB]) clash = 1;
        used[a % NB] = 1;
        if (w_we) model[a] = merge(model[a], w_wdata[32*i +: 32], w_be[4*i +: 4]);
        else w_exp[32*i +: 32] <= model[a];
      end
      if (!w_we) w_chk <= w_wvalid;
    end
    for (int m = 0; m < NM; m++) if (n_req[m] && n_gnt[m]) begin
      automatic int a = (n_addr[m] / 4) % WORDS;
      if (used[a % NB]) clash = 1;
      used[a % NB] = 1;
      if (n_we[m]) model[a] = merge(model[a], n_wdata[m], n_be[m]);
      else begin n_exp[m] <= model[a]; n_chk[m] <= 1'b1; end
    end
    chk(!clash, "a bank was granted twice in one cycle");
    if (mode == 1) chk(n_gnt == n_req && (n_req != 0), "distinct banks not all granted");
    if (mode == 2) chk(w_gnt, "lone wide port not granted");
    for (int m = 0; m < NM; m++) begin
      n_wait[m] = (n_req[m] && !n_gnt[m]) ? n_wait[m] + 1 : 0;
      if (n_wait[m] > max_wait) max_wait = n_wait[m];
    end
    w_wait = (w_req && !w_gnt) ? w_wait + 1 : 0;
    if (w_wait > max_wait) max_wait = w_wait;
  end

  // read responses
  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) if (n_chk[m])
      chk(n_rvalid[m] && n_rdata[m] == n_exp[m], $sformatf("narrow master %0d read data", m));
    for (int i = 0; i < WW; i++) if (w_chk[i])
      chk(w_rvalid && w_rdata[32*i +: 32] == w_exp[32*i +: 32], $sformatf("wide read word %0d", i));
  end

  // stimulus: new request when idle or just granted
  always @(negedge clk) if (rst_n && mode != 4) begin
    for (int m = 0; m < NM; m++) begin
      if (!n_req[m] || n_gnt_q[m]) begin
        n_req[m] = (mode == 0) ? ($urandom_range(0, 2) != 0) : 1'b1;
        n_we[m] = $urandom_range(0, 1);
        n_be[m] = $urandom;
        n_wdata[m] = $urandom;
        n_addr[m] = (mode == 1) ? 32'((($urandom_range(0, BW - 1)) * NB + m) * 4)
                                : 32'($urandom_range(0, WORDS - 1) * 4);
      end
    end
    if (mode == 1 || mode == 2) n_req = (mode == 2) ? '0 : n_req;
    if (!w_req || w_gnt_q) begin
      w_req = (mode == 1) ? 1'b0 : (mode == 2) ? 1'b1 : ($urandom_range(0, 1) != 0);
      w_we = $urandom_range(0, 1);
      w_addr = 32'($urandom_range(0, WORDS / WW - 1) * WW * 4 + ($urandom_range(0, 1) ? WW * 2 : 0));
      w_wvalid = ($urandom_range(0, 1)) ? '1 : WW'(16'h00ff);
      w_be = {WW{4'hf}} ^ WW*4'($urandom);
      for (int i = 0; i < WW; i++) w_wdata[32*i +: 32] = $urandom;
    end
  end
  logic [NM-1:0] n_gnt_q = 0;
  logic w_gnt_q = 0;
  always @(posedge clk) begin n_gnt_q <= n_req & n_gnt; w_gnt_q <= w_req && w_gnt; end

  initial begin
    for (int a = 0; a < WORDS; a++) model[a] = 0;
    for (int m = 0; m < NM; m++) begin n_addr[m] = 0; n_wdata[m] = 0; n_be[m] = 0; n_wait[m] = 0; end
    // zero the banks through the wide port (mode 4: no other traffic)
    @(negedge clk); rst_n = 1;
    for (int a = 0; a < WORDS; a += WW) begin
      w_req = 1; w_we = 1; w_addr = a * 4; w_wvalid = '1; w_be = '1; w_wdata = '0;
      @(negedge clk);
    end
    w_req = 0; @(negedge clk);
    mode = 0; repeat (5000) @(negedge clk);
    chk(max_wait <= NM + 2, $sformatf("longest wait %0d cycles", max_wait));
    chk(conflict_cnt > 0, "no wide/narrow conflict happened");
    mode = 1; w_req = 0; repeat (200) @(negedge clk);
    mode = 2; repeat (200) @(negedge clk);
    repeat (3) @(negedge clk);
    $display("wide/narrow conflicts %0d, longest wait %0d", conflict_cnt, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
