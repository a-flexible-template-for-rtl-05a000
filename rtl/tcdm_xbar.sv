// tcdm_xbar: the cluster interconnect between the word-wide initiators
// (cores, DMA ports) plus one wide accelerator port and the TCDM banks.
//
// Addresses are word-interleaved: bank = addr[2 +: log2(NB)], row =
// the bits above. Each cycle every bank serves at most one request:
//   - narrow masters: per-bank round-robin among the masters that target
//     the bank; losers keep their request up (request/grant protocol);
//   - wide port (WW words from one aligned base address, each word with a
//     valid bit): granted all-or-nothing, so the accelerator sees a single
//     grant for the whole beat. Wide and narrow traffic alternate their
//     priority after every cycle in which they collided, so neither
//     starves.
// Read data and a response valid return one cycle after the grant, for
// reads and writes alike. conflict_cnt counts cycles in which the wide
// port lost a bank to the narrow side.
// The published cluster diagram gives 32 banks of 32 bits and the port
// widths; the arbitration policy is this implementation's choice.
module tcdm_xbar #(
  parameter int unsigned NM    = 12,     // narrow (32-bit) masters
  parameter int unsigned WW    = 16,     // words of the wide port
  parameter int unsigned NB    = 32,     // banks
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  // narrow masters
  input  logic [NM-1:0]     n_req,
  output logic [NM-1:0]     n_gnt,
  input  logic [31:0]       n_addr  [NM],
  input  logic [NM-1:0]     n_we,
  input  logic [3:0]        n_be    [NM],
  input  logic [31:0]       n_wdata [NM],
  output logic [NM-1:0]     n_rvalid,
  output logic [31:0]       n_rdata [NM],
  // wide master
  input  logic              w_req,
  output logic              w_gnt,
  input  logic [31:0]       w_addr,
  input  logic              w_we,
  input  logic [WW-1:0]     w_wvalid,   // which words of the beat are used
  input  logic [WW*4-1:0]   w_be,
  input  logic [WW*32-1:0]  w_wdata,
  output logic              w_rvalid,
  output logic [WW*32-1:0]  w_rdata,
  // banks
  output logic [NB-1:0]     b_req,
  output logic [NB-1:0]     b_we,
  output logic [3:0]        b_be    [NB],
  output logic [$clog2(BANK_WORDS)-1:0] b_addr [NB],
  output logic [31:0]       b_wdata [NB],
  input  logic [31:0]       b_rdata [NB],
  output logic [31:0]       conflict_cnt
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NB-1:0]    w_tgt;              // banks the wide port wants
  logic [BW-1:0]    w_bank_word [NB];   // which word of the beat goes to bank
  logic [NB-1:0]    n_tgt_any;
  logic             prio_wide, collide, w_win;
  logic [MW-1:0]    rr [NB];
  logic [NB-1:0]    n_win_valid;
  logic [MW-1:0]    n_win [NB];
  logic [NM-1:0]    n_gnt_d;
  logic [NM-1:0]    n_gnt_q;
  logic [BW-1:0]    n_bank_q [NM];
  logic             w_gnt_q;
  logic [BW-1:0]    w_bank_q [WW];
  logic [BW-1:0]    wbase;

  // wide port: word k goes to bank (base + k) mod NB
  assign wbase = w_addr[2 +: BW];
  always_comb begin
    w_tgt = '0;
    for (int b = 0; b < int'(NB); b++) w_bank_word[b] = '0;
    for (int k = 0; k < int'(WW); k++) begin
      if (w_req && w_wvalid[k]) begin
        w_tgt[BW'(wbase + BW'(k))] = 1'b1;
        w_bank_word[BW'(wbase + BW'(k))] = BW'(k);
      end
    end
  end

  // narrow side: round robin per bank
  always_comb begin
    n_tgt_any = '0;
    for (int b = 0; b < int'(NB); b++) begin
      n_win_valid[b] = 1'b0;
      n_win[b] = '0;
      for (int j = 0; j < int'(NM); j++) begin
        logic [MW-1:0] m;
        m = MW'((int'(rr[b]) + j) % int'(NM));
        if (!n_win_valid[b] && n_req[m] && n_addr[m][2 +: BW] == BW'(b)) begin
          n_win_valid[b] = 1'b1;
          n_win[b] = MW'(m);
        end
      end
      n_tgt_any[b] = n_win_valid[b];
    end
    collide = |(w_tgt & n_tgt_any);
    w_win   = w_req && (w_tgt != '0) && (prio_wide || !collide);
    w_gnt   = w_win;
    n_gnt_d = '0;
    for (int b = 0; b < int'(NB); b++)
      if (n_win_valid[b] && !(w_win && w_tgt[b])) n_gnt_d[n_win[b]] = 1'b1;
    n_gnt = n_gnt_d;
  end

  // bank requests
  always_comb begin
    for (int b = 0; b < int'(NB); b++) begin
      b_req[b] = 1'b0; b_we[b] = 1'b0; b_be[b] = '0; b_addr[b] = '0; b_wdata[b] = '0;
      if (w_win && w_tgt[b]) begin
        b_req[b]   = 1'b1;
        b_we[b]    = w_we;
        b_be[b]    = w_be[4*w_bank_word[b] +: 4];
        b_addr[b]  = RW'((w_addr + 32'(w_bank_word[b]) * 4) >> (2 + BW));
        b_wdata[b] = w_wdata[32*w_bank_word[b] +: 32];
      end else if (n_win_valid[b]) begin
        b_req[b]   = 1'b1;
        b_we[b]    = n_we[n_win[b]];
        b_be[b]    = n_be[n_win[b]];
        b_addr[b]  = RW'(n_addr[n_win[b]] >> (2 + BW));
        b_wdata[b] = n_wdata[n_win[b]];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_wide <= 1'b1;
      n_gnt_q   <= '0;
      w_gnt_q   <= 1'b0;
      conflict_cnt <= '0;
      for (int b = 0; b < int'(NB); b++) rr[b] <= '0;
      for (int m = 0; m < int'(NM); m++) n_bank_q[m] <= '0;
      for (int k = 0; k < int'(WW); k++) w_bank_q[k] <= '0;
    end else begin
      if (w_req && collide) begin
        prio_wide <= !prio_wide;
        if (!w_win) conflict_cnt <= conflict_cnt + 1;
      end
      n_gnt_q <= n_gnt_d;
      w_gnt_q <= w_win;
      for (int b = 0; b < int'(NB); b++)
        if (n_win_valid[b] && !(w_win && w_tgt[b]))
          rr[b] <= (n_win[b] == MW'(NM - 1)) ? '0 : n_win[b] + 1'b1;
      for (int m = 0; m < int'(NM); m++) n_bank_q[m] <= n_addr[m][2 +: BW];
      for (int k = 0; k < int'(WW); k++) w_bank_q[k] <= BW'(wbase + BW'(k));
    end
  end

  // responses, one cycle after the grant
  always_comb begin
    n_rvalid = n_gnt_q;
    for (int m = 0; m < int'(NM); m++) n_rdata[m] = b_rdata[n_bank_q[m]];
    w_rvalid = w_gnt_q;
    for (int k = 0; k < int'(WW); k++) w_rdata[32*k +: 32] = b_rdata[w_bank_q[k]];
  end

  // a bank never serves the wide port and a narrow master together
  logic overlap;
  always_comb begin
    overlap = 1'b0;
    for (int m = 0; m < int'(NM); m++)
      if (n_gnt_d[m] && w_win && w_tgt[n_addr[m][2 +: BW]]) overlap = 1'b1;
  end
  assert property (@(posedge clk) disable iff (!rst_n) !overlap);
endmodule
