// softex_cluster: the memory side of the Transformer cluster: a 256 KiB
// tightly-coupled data memory (32 word-interleaved banks of 8 KiB), the
// cluster interconnect, the arbiter that shares the wide accelerator port
// between the tensor processing engine and SoftEx, and SoftEx itself.
//
// The parts that are not built here appear as ports:
//   core_*  eight 32-bit data ports of the RISC-V cores,
//   dma_*   four 32-bit data ports of the DMA controller (its two 64-bit
//           ports, each split in two words),
//   tpe_*   the 512-bit port of the tensor processing engine,
//   cfg_*   SoftEx's control target as reached through the peripheral
//           interconnect, plus its busy flag and completion event.
// Every data port follows the request/grant protocol of tcdm_xbar (read
// data one cycle after the grant). Byte addresses run from 0 to 256 KiB.
module softex_cluster #(
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned N_DMA      = 4,
  parameter int unsigned N_BANKS    = 32,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned LANES      = 16,
  parameter int unsigned TPE_WORDS  = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // cores
  input  logic [N_CORES-1:0]     core_req,
  output logic [N_CORES-1:0]     core_gnt,
  input  logic [31:0]            core_addr  [N_CORES],
  input  logic [N_CORES-1:0]     core_we,
  input  logic [3:0]             core_be    [N_CORES],
  input  logic [31:0]            core_wdata [N_CORES],
  output logic [N_CORES-1:0]     core_rvalid,
  output logic [31:0]            core_rdata [N_CORES],
  // DMA
  input  logic [N_DMA-1:0]       dma_req,
  output logic [N_DMA-1:0]       dma_gnt,
  input  logic [31:0]            dma_addr  [N_DMA],
  input  logic [N_DMA-1:0]       dma_we,
  input  logic [3:0]             dma_be    [N_DMA],
  input  logic [31:0]            dma_wdata [N_DMA],
  output logic [N_DMA-1:0]       dma_rvalid,
  output logic [31:0]            dma_rdata [N_DMA],
  // tensor processing engine
  input  logic                   tpe_req,
  output logic                   tpe_gnt,
  input  logic [31:0]            tpe_addr,
  input  logic                   tpe_we,
  input  logic [TPE_WORDS*4-1:0] tpe_be,
  input  logic [TPE_WORDS*32-1:0] tpe_wdata,
  output logic                   tpe_rvalid,
  output logic [TPE_WORDS*32-1:0] tpe_rdata,
  // SoftEx control target
  input  logic                   cfg_req,
  output logic                   cfg_gnt,
  input  logic [31:0]            cfg_addr,
  input  logic                   cfg_we,
  input  logic [31:0]            cfg_wdata,
  output logic                   cfg_rvalid,
  output logic [31:0]            cfg_rdata,
  output logic                   softex_busy,
  output logic                   softex_evt
);
  localparam int unsigned NM = N_CORES + N_DMA;
  localparam int unsigned SW = LANES / 2;          // SoftEx words per beat
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [NM-1:0]  n_req, n_gnt, n_we, n_rvalid;
  logic [31:0]    n_addr [NM], n_wdata [NM], n_rdata [NM];
  logic [3:0]     n_be [NM];

  logic                   w_req, w_gnt, w_we, w_rvalid;
  logic [31:0]            w_addr;
  logic [TPE_WORDS-1:0]   w_wvalid;
  logic [TPE_WORDS*4-1:0] w_be;
  logic [TPE_WORDS*32-1:0] w_wdata, w_rdata;

  logic                   s_req, s_gnt, s_we, s_rvalid;
  logic [31:0]            s_addr;
  logic [SW*4-1:0]        s_be;
  logic [SW*32-1:0]       s_wdata, s_rdata;

  logic [N_BANKS-1:0]     b_req, b_we;
  logic [3:0]             b_be [N_BANKS];
  logic [RW-1:0]          b_addr [N_BANKS];
  logic [31:0]            b_wdata [N_BANKS], b_rdata [N_BANKS];
  logic [31:0]            conflict_cnt, contend_cnt;

  // narrow initiators: cores first, then DMA ports
  always_comb begin
    for (int i = 0; i < int'(N_CORES); i++) begin
      n_req[i] = core_req[i]; n_addr[i] = core_addr[i]; n_we[i] = core_we[i];
      n_be[i] = core_be[i]; n_wdata[i] = core_wdata[i];
      core_gnt[i] = n_gnt[i]; core_rvalid[i] = n_rvalid[i]; core_rdata[i] = n_rdata[i];
    end
    for (int i = 0; i < int'(N_DMA); i++) begin
      n_req[N_CORES+i] = dma_req[i]; n_addr[N_CORES+i] = dma_addr[i];
      n_we[N_CORES+i] = dma_we[i]; n_be[N_CORES+i] = dma_be[i];
      n_wdata[N_CORES+i] = dma_wdata[i];
      dma_gnt[i] = n_gnt[N_CORES+i]; dma_rvalid[i] = n_rvalid[N_CORES+i];
      dma_rdata[i] = n_rdata[N_CORES+i];
    end
  end

  softex #(.N(LANES)) u_softex (
    .clk, .rst_n, .cfg_req, .cfg_gnt, .cfg_addr, .cfg_we, .cfg_wdata,
    .cfg_rvalid, .cfg_rdata,
    .mem_req(s_req), .mem_gnt(s_gnt), .mem_addr(s_addr), .mem_we(s_we),
    .mem_be(s_be), .mem_wdata(s_wdata), .mem_rvalid(s_rvalid), .mem_rdata(s_rdata),
    .busy(softex_busy), .evt_done(softex_evt));

  tcdm_arbiter #(.WW(TPE_WORDS), .SW(SW)) u_arb (
    .clk, .rst_n,
    .t_req(tpe_req), .t_gnt(tpe_gnt), .t_addr(tpe_addr), .t_we(tpe_we),
    .t_be(tpe_be), .t_wdata(tpe_wdata), .t_rvalid(tpe_rvalid), .t_rdata(tpe_rdata),
    .s_req, .s_gnt, .s_addr, .s_we, .s_be, .s_wdata, .s_rvalid, .s_rdata,
    .w_req, .w_gnt, .w_addr, .w_we, .w_wvalid, .w_be, .w_wdata, .w_rvalid, .w_rdata,
    .contend_cnt);

  tcdm_xbar #(.NM(NM), .WW(TPE_WORDS), .NB(N_BANKS), .BANK_WORDS(BANK_WORDS)) u_xbar (
    .clk, .rst_n,
    .n_req, .n_gnt, .n_addr, .n_we, .n_be, .n_wdata, .n_rvalid, .n_rdata,
    .w_req, .w_gnt, .w_addr, .w_we, .w_wvalid, .w_be, .w_wdata, .w_rvalid, .w_rdata,
    .b_req, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata, .conflict_cnt);

  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk, .req(b_req[b]), .we(b_we[b]), .be(b_be[b]), .addr(b_addr[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b]));
  end
endmodule
