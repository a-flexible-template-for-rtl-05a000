// softex_datapath: the N-lane SoftEx datapath with its max unit, adder
// tree, denominator accumulator, weight buffers and output FIFO.
//
// Two register stages, one input vector at a time, with ready/valid
// handshakes so that stalls (memory bubbles, the denominator rescale, a
// full output FIFO) propagate backwards without extra control:
//   S1  lane MAU input registers. ACCUM: the max unit forms new_max from
//       the vector and curr_max; the MAUs subtract it. NORM: the MAUs
//       subtract the final maximum. SUMEXP: the MAUs multiply x by b_i;
//       the vector is held for N_w cycles while b_i steps through the
//       B buffer.
//   S2  lane EXPU output registers. ACCUM: adder tree -> den_acc input
//       (with the rescale flag and curr_max - new_max). NORM: MAU multiply
//       by 1/den (BF16) -> output FIFO. SUMEXP: lane accumulators weight by
//       a_i and add; after the last weight the BF16 sums go to the output
//       FIFO.
// In SUMEXP the first two beats of the input stream are the a and b
// weight vectors (they load the A and B buffers); this protocol with the
// controller is this implementation's choice.
// Output bandwidth: NORM one vector per cycle, SUMEXP one vector every
// N_w cycles.
module softex_datapath
  import softex_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned FMA_STAGES = 3,
  parameter int unsigned OUT_DEPTH  = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  softex_phase_e    phase,
  input  logic [$clog2(N):0] nw,
  // input vectors
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N*16-1:0]  in_data,
  input  logic [N-1:0]     in_mask,
  // denominator control
  input  logic             den_finish,
  output logic             den_done,
  output logic             empty,
  // output vectors
  output logic             out_valid,
  input  logic             out_ready,
  output logic [N*16-1:0]  out_data,
  output logic [N-1:0]     out_mask,
  // event counters
  output logic [31:0]      rescale_cnt,
  output logic [31:0]      den_stall_cnt
);
  logic         sumexp;
  bf16_t        x_in [N], x_q [N], e_q [N], norm_o [N], acc_sum [N];
  bf16_t        new_max, curr_max, diff, max_val, a_w, b_w, recip;
  logic         upd;
  logic         s1_valid, s2_valid, s1_fire, s2_ready, s2_consume, s1_release;
  logic [N-1:0] s1_mask, s2_mask;
  logic         s2_rescale, s2_first, s2_last, s1_first;
  bf16_t        s2_diff;
  logic [1:0]   wcnt;
  logic         wloading, in_fire;
  logic         b_last, a_last;
  fp32_t        tree_sum;
  logic         den_valid, den_ready;
  logic         of_in_valid, of_in_ready;
  logic [N*16+N-1:0] of_in_data, of_out_data;
  logic [N*16-1:0]   of_vec;
  logic [$clog2(OUT_DEPTH+1)-1:0] of_cnt;
  fp32_t        den_val, recip_val;

  assign sumexp = (phase == PH_SUMEXP);

  for (genvar i = 0; i < int'(N); i++) begin : g_unpack
    assign x_in[i] = in_data[16*i +: 16];
  end

  // ---------------- weight loading (SUMEXP: first two beats) -------------
  assign wloading = sumexp && (wcnt != 2'd2);
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    wcnt <= '0;
    else if (clear)                wcnt <= '0;
    else if (in_fire && wloading)  wcnt <= wcnt + 1'b1;
  end

  weight_buf #(.N(N)) u_bbuf (
    .clk, .rst_n, .load(in_fire && wloading && wcnt == 2'd1), .load_data(x_in),
    .restart(clear), .next(s1_fire && sumexp), .nw, .w(b_w), .last(b_last));
  weight_buf #(.N(N)) u_abuf (
    .clk, .rst_n, .load(in_fire && wloading && wcnt == 2'd0), .load_data(x_in),
    .restart(clear), .next(s2_valid && s2_consume && sumexp), .nw, .w(a_w),
    .last(a_last));

  // ---------------- stage 1 ----------------------------------------------
  assign s1_release = !sumexp || b_last;
  assign s1_fire    = s1_valid && s2_ready;
  assign in_ready   = wloading || !s1_valid || (s1_fire && s1_release);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_mask  <= '0;
      s1_first <= 1'b0;
    end else if (clear) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
    end else begin
      if (in_fire && !wloading) begin
        s1_valid <= 1'b1;
        s1_mask  <= in_mask;
        s1_first <= 1'b1;
      end else if (s1_fire) begin
        if (s1_release) s1_valid <= 1'b0;
        s1_first <= 1'b0;
      end
    end
  end

  max_unit #(.N(N)) u_max (
    .clk, .rst_n, .clear, .update(s1_fire && phase == PH_ACCUM),
    .x(x_q), .mask(s1_mask), .new_max, .curr_max, .upd, .diff);

  assign max_val = (phase == PH_ACCUM) ? new_max : curr_max;

  for (genvar i = 0; i < int'(N); i++) begin : g_lane
    softex_lane u_lane (
      .clk, .rst_n, .sumexp,
      .load_x(in_fire && !wloading), .x_in(x_in[i]),
      .max_val, .b_w, .recip,
      .e_load(s1_fire),
      .acc_en(s2_valid && s2_consume && sumexp), .acc_first(s2_first), .a_w,
      .x_q(x_q[i]), .e_q(e_q[i]), .norm_o(norm_o[i]), .acc_sum(acc_sum[i]));
  end

  // ---------------- stage 2 ----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid   <= 1'b0;
      s2_mask    <= '0;
      s2_rescale <= 1'b0;
      s2_diff    <= '0;
      s2_first   <= 1'b0;
      s2_last    <= 1'b0;
    end else if (clear) begin
      s2_valid   <= 1'b0;
    end else if (s2_ready) begin
      s2_valid   <= s1_valid;
      s2_mask    <= s1_mask;
      s2_rescale <= upd && phase == PH_ACCUM;
      s2_diff    <= diff;
      s2_first   <= s1_first;
      s2_last    <= b_last;
    end
  end

  add_tree #(.N(N)) u_tree (.x(e_q), .mask(s2_mask), .sum(tree_sum));

  assign den_valid = s2_valid && phase == PH_ACCUM;

  den_acc #(.P(FMA_STAGES)) u_den (
    .clk, .rst_n, .clear,
    .in_valid(den_valid), .in_ready(den_ready), .in_addend(tree_sum),
    .in_rescale(s2_rescale), .in_diff(s2_diff),
    .finish(den_finish), .done(den_done), .den_o(den_val), .recip_o(recip_val),
    .recip_bf16(recip), .rescale_cnt, .stall_cnt(den_stall_cnt));

  always_comb begin
    of_in_valid = 1'b0;
    of_vec      = '0;
    case (phase)
      PH_ACCUM:  s2_consume = den_ready;
      PH_NORM: begin
        s2_consume  = of_in_ready;
        of_in_valid = s2_valid;
        for (int i = 0; i < int'(N); i++) of_vec[16*i +: 16] = norm_o[i];
      end
      PH_SUMEXP: begin
        s2_consume  = !s2_last || of_in_ready;
        of_in_valid = s2_valid && s2_last;
        for (int i = 0; i < int'(N); i++) of_vec[16*i +: 16] = acc_sum[i];
      end
      default:   s2_consume = 1'b1;
    endcase
  end
  assign s2_ready   = !s2_valid || s2_consume;
  assign of_in_data = {s2_mask, of_vec};

  stream_fifo #(.WIDTH(N*16+N), .DEPTH(OUT_DEPTH)) u_outfifo (
    .clk, .rst_n, .clear,
    .in_valid(of_in_valid), .in_ready(of_in_ready), .in_data(of_in_data),
    .out_valid, .out_ready, .out_data(of_out_data), .count(of_cnt));

  assign out_data = of_out_data[N*16-1:0];
  assign out_mask = of_out_data[N*16 +: N];
  assign empty    = !s1_valid && !s2_valid && (of_cnt == '0);

  // the A buffer must finish its pass exactly when the B buffer's item does
  assert property (@(posedge clk) disable iff (!rst_n)
    (sumexp && s2_valid && s2_consume) |-> (a_last == s2_last));
endmodule
