// softex_streamer: SoftEx data mover: a source, a sink and a multiplexer
// onto one wide memory port.
//
// Memory port (request/grant, as on a tightly-coupled data memory with
// bank conflicts): mem_req with mem_addr/mem_we/mem_be/mem_wdata is held
// until mem_gnt; read data returns on mem_rdata the cycle after the grant
// (mem_rvalid). One beat is N BF16 elements (N*16 bits); addresses are
// byte addresses and must be aligned to a beat.
// Source: on src_start it reads ceil(len/N) consecutive beats from src_addr
// and pushes them, with a lane mask for a partial last beat, into its
// FIFO, which drives the out_* stream (ready/valid). Reads are only issued
// when the FIFO has room for every outstanding response. src_done stays
// high once every beat has arrived.
// Sink: on snk_start it writes the next ceil(len/N) beats of the in_*
// stream to consecutive beats at snk_addr, byte enables from the mask.
// snk_done stays high once all are granted.
// Mux: when both want the port in the same cycle they alternate, so loads
// of new scores and stores of results interleave.
// The published block diagram gives source, sink, the mux and the N x 16
// widths; FIFO depth and arbitration are this implementation's choices.
module softex_streamer
  import softex_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned SRC_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // source command
  input  logic             src_start,
  input  logic [31:0]      src_addr,
  input  logic [31:0]      src_len,
  output logic             src_done,
  output logic             src_empty,
  // sink command
  input  logic             snk_start,
  input  logic [31:0]      snk_addr,
  input  logic [31:0]      snk_len,
  output logic             snk_done,
  // source stream out
  output logic             out_valid,
  input  logic             out_ready,
  output logic [N*16-1:0]  out_data,
  output logic [N-1:0]     out_mask,
  // sink stream in
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N*16-1:0]  in_data,
  input  logic [N-1:0]     in_mask,
  // memory port
  output logic             mem_req,
  input  logic             mem_gnt,
  output logic [31:0]      mem_addr,
  output logic             mem_we,
  output logic [N*2-1:0]   mem_be,
  output logic [N*16-1:0]  mem_wdata,
  input  logic             mem_rvalid,
  input  logic [N*16-1:0]  mem_rdata
);
  localparam int unsigned BEAT_BYTES = N * 2;
  localparam int unsigned CW = $clog2(SRC_DEPTH + 1);

  logic [31:0] src_base, src_total, src_req_cnt, src_rsp_cnt, src_elems;
  logic [31:0] snk_base, snk_total, snk_cnt;
  logic        src_want, snk_want, sel_snk, prio_snk, rd_pend_q;
  logic [N-1:0] rsp_mask;
  logic [CW-1:0] fifo_cnt;
  logic [N*16+N-1:0] fifo_out;
  logic        fifo_in_ready;
  logic [31:0] outstanding;

  function automatic logic [N-1:0] beat_mask(input logic [31:0] total_elems,
                                             input logic [31:0] beat);
    logic [31:0] rem;
    rem = total_elems - beat * N;
    for (int i = 0; i < int'(N); i++) beat_mask[i] = (32'(i) < rem);
  endfunction

  // ---------------- source ------------------------------------------------
  assign outstanding = src_req_cnt - src_rsp_cnt;
  assign src_want = (src_req_cnt < src_total) &&
                    (outstanding + 32'(fifo_cnt) < SRC_DEPTH);
  assign rsp_mask = beat_mask(src_elems, src_rsp_cnt);

  stream_fifo #(.WIDTH(N*16+N), .DEPTH(SRC_DEPTH)) u_srcfifo (
    .clk, .rst_n, .clear(src_start),
    .in_valid(rd_pend_q && mem_rvalid), .in_ready(fifo_in_ready),
    .in_data({rsp_mask, mem_rdata}),
    .out_valid, .out_ready, .out_data(fifo_out), .count(fifo_cnt));

  assign out_data  = fifo_out[N*16-1:0];
  assign out_mask  = fifo_out[N*16 +: N];
  assign src_done  = (src_rsp_cnt == src_total);
  assign src_empty = src_done && (fifo_cnt == '0);

  // ---------------- sink --------------------------------------------------
  assign snk_want = (snk_cnt < snk_total) && in_valid;
  assign snk_done = (snk_cnt == snk_total);

  // ---------------- mux ---------------------------------------------------
  always_comb begin
    if (src_want && snk_want) sel_snk = prio_snk;
    else                      sel_snk = snk_want;
  end
  assign mem_req   = src_want || snk_want;
  assign mem_we    = sel_snk;
  assign mem_addr  = sel_snk ? snk_base + snk_cnt * BEAT_BYTES
                             : src_base + src_req_cnt * BEAT_BYTES;
  assign mem_wdata = in_data;
  always_comb begin
    for (int i = 0; i < int'(N); i++)
      mem_be[2*i +: 2] = sel_snk ? {2{in_mask[i]}} : 2'b11;
  end
  assign in_ready  = mem_req && mem_gnt && sel_snk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_base <= '0; src_total <= '0; src_elems <= '0;
      src_req_cnt <= '0; src_rsp_cnt <= '0;
      snk_base <= '0; snk_total <= '0; snk_cnt <= '0;
      prio_snk <= 1'b0; rd_pend_q <= 1'b0;
    end else begin
      rd_pend_q <= mem_req && mem_gnt && !sel_snk;
      if (mem_req && mem_gnt && src_want && snk_want) prio_snk <= !sel_snk;
      if (src_start) begin
        src_base    <= src_addr;
        src_elems   <= src_len;
        src_total   <= (src_len + N - 1) / N;
        src_req_cnt <= '0;
        src_rsp_cnt <= '0;
      end else begin
        if (mem_req && mem_gnt && !sel_snk) src_req_cnt <= src_req_cnt + 1;
        if (rd_pend_q && mem_rvalid)        src_rsp_cnt <= src_rsp_cnt + 1;
      end
      if (snk_start) begin
        snk_base  <= snk_addr;
        snk_total <= (snk_len + N - 1) / N;
        snk_cnt   <= '0;
      end else if (mem_req && mem_gnt && sel_snk) begin
        snk_cnt <= snk_cnt + 1;
      end
    end
  end

  // the FIFO always has room for a read response (credit check above)
  assert property (@(posedge clk) disable iff (!rst_n)
    (rd_pend_q && mem_rvalid) |-> fifo_in_ready);
  // a request is held stable until granted
  assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req && !mem_gnt && !src_start && !snk_start) |=> mem_req);
endmodule
