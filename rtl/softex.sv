// softex: the SoftEx accelerator for softmax and for the sum of
// exponentials used by GELU, organised as a hardware processing engine:
// controller (register file + FSM), streamer (source, sink, memory mux)
// and the N-lane BF16 datapath.
//
// Interfaces: a 32-bit control target (cfg_*, from the cores' peripheral
// interconnect), one N*16-bit request/grant memory port (mem_*, towards
// the shared L1 memory; read data one cycle after grant) and a one-cycle
// completion event. With the default N = 16 lanes the memory port is 256
// bits wide. See softex_ctrl for the register map and job sequence and
// softex_datapath for the pipeline.
module softex
  import softex_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned FMA_STAGES = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_req,
  output logic            cfg_gnt,
  input  logic [31:0]     cfg_addr,
  input  logic            cfg_we,
  input  logic [31:0]     cfg_wdata,
  output logic            cfg_rvalid,
  output logic [31:0]     cfg_rdata,
  output logic            mem_req,
  input  logic            mem_gnt,
  output logic [31:0]     mem_addr,
  output logic            mem_we,
  output logic [N*2-1:0]  mem_be,
  output logic [N*16-1:0] mem_wdata,
  input  logic            mem_rvalid,
  input  logic [N*16-1:0] mem_rdata,
  output logic            busy,
  output logic            evt_done
);
  logic             clear, den_finish, den_done, dp_empty;
  softex_phase_e    phase;
  logic [$clog2(N):0] nw;
  logic             src_start, src_done, src_empty, snk_start, snk_done;
  logic [31:0]      src_addr, src_len, snk_addr, snk_len;
  logic             s2d_valid, s2d_ready, d2s_valid, d2s_ready;
  logic [N*16-1:0]  s2d_data, d2s_data;
  logic [N-1:0]     s2d_mask, d2s_mask;
  logic [31:0]      rescale_cnt, den_stall_cnt;

  softex_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .cfg_req, .cfg_gnt, .cfg_addr, .cfg_we, .cfg_wdata,
    .cfg_rvalid, .cfg_rdata, .clear, .phase, .nw, .den_finish, .den_done,
    .dp_empty, .src_start, .src_addr, .src_len, .src_done, .src_empty,
    .snk_start, .snk_addr, .snk_len, .snk_done, .busy, .evt_done);

  softex_streamer #(.N(N)) u_streamer (
    .clk, .rst_n, .src_start, .src_addr, .src_len, .src_done, .src_empty,
    .snk_start, .snk_addr, .snk_len, .snk_done,
    .out_valid(s2d_valid), .out_ready(s2d_ready), .out_data(s2d_data), .out_mask(s2d_mask),
    .in_valid(d2s_valid), .in_ready(d2s_ready), .in_data(d2s_data), .in_mask(d2s_mask),
    .mem_req, .mem_gnt, .mem_addr, .mem_we, .mem_be, .mem_wdata, .mem_rvalid, .mem_rdata);

  softex_datapath #(.N(N), .FMA_STAGES(FMA_STAGES)) u_dp (
    .clk, .rst_n, .clear, .phase, .nw,
    .in_valid(s2d_valid), .in_ready(s2d_ready), .in_data(s2d_data), .in_mask(s2d_mask),
    .den_finish, .den_done, .empty(dp_empty),
    .out_valid(d2s_valid), .out_ready(d2s_ready), .out_data(d2s_data), .out_mask(d2s_mask),
    .rescale_cnt, .den_stall_cnt);
endmodule
