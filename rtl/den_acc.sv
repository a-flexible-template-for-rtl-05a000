// den_acc: softmax denominator accumulator with online max rescaling and
// Newton-Raphson inversion.
//
// Input stream (ready/valid): one FP32 addend per vector (the adder-tree sum
// of expp(x - max)) plus, when the running maximum grew for that vector, a
// BF16 difference curr_max - new_max. The difference goes through this
// block's own EXPU before the input FIFO, so the FIFO holds the rescaling
// factor expp(curr_max - new_max). The factor is zero padded to FP32.
//
// Accumulation: a single FP32 FMA feeds a ring of P pipeline registers, so
// P partial sums circulate, each tagged with the maximum epoch it was last
// scaled to. Every cycle the slot leaving the ring is either
//   - rescaled (slot * factor), when its tag is older than the current one,
//   - added to the FIFO head (slot * 1 + addend), popping the FIFO, or
//   - passed unchanged.
// A FIFO head that carries a new factor bumps the current tag, which makes
// all P slots be rescaled as they come around; meanwhile the head stays in
// the FIFO, so the FIFO fills and its ready drops (the stall). Correct
// even for a strictly increasing input.
// Finish: when `finish` is high, the FIFO empty and no rescale pending,
// the P slots are summed into the last-stage register (P cycles), giving
// den. Then the reciprocal: seed exponent 2*127-1-E and mantissa
// not(M)^2/2, then two Newton iterations t = 2 - den*y, y = y*t, each two
// FMA operations (4 cycles). done rises with recip valid; the values stay
// until `clear`.
// The ring of P slots, the tag width and the FIFO depth are this
// implementation's reading of the published description, which gives the
// mechanism (tags, stall through the FIFO ready, rescaling with the FMA
// itself) but not the pipeline depth. The FMA is written combinational and
// followed by the P ring registers.
module den_acc
  import softex_pkg::*;
#(
  parameter int unsigned P          = 3,   // FMA pipeline stages
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned TAG_W      = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp32_t       in_addend,
  input  logic        in_rescale,
  input  bf16_t       in_diff,
  input  logic        finish,
  output logic        done,
  output fp32_t       den_o,
  output fp32_t       recip_o,
  output bf16_t       recip_bf16,
  output logic [31:0] rescale_cnt,
  output logic [31:0] stall_cnt
);
  typedef enum logic [1:0] {S_ACC, S_RED, S_INV, S_DONE} state_e;
  typedef struct packed {
    logic  rescale;
    bf16_t factor;
    fp32_t addend;
  } item_t;

  state_e      state_q;
  fp32_t       ring_val [P];
  logic [TAG_W-1:0] ring_tag [P];
  logic [TAG_W-1:0] cur_tag;
  fp32_t       scale_q, hold_q, y_q, t_q;
  logic        applied_q;
  logic [$clog2(P+1)-1:0] red_cnt;
  logic [1:0]  inv_step;
  bf16_t       factor;
  item_t       in_item, head;
  logic        head_valid, pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_cnt;
  fp32_t       fa, fb, fc, fy, new_val, y0;
  logic [TAG_W-1:0] new_tag;
  logic        pending, start_rescale;
  logic [22:0] nm;
  logic [45:0] nm_sq;

  expu u_expu (.x(in_diff), .y(factor));

  assign in_item = '{rescale: in_rescale, factor: factor, addend: in_addend};

  stream_fifo #(.WIDTH($bits(item_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear,
    .in_valid, .in_ready, .in_data(in_item),
    .out_valid(head_valid), .out_ready(pop), .out_data(head), .count(fifo_cnt));

  fp_fma #(.EW(8), .MW(23)) u_fma (.a(fa), .b(fb), .c(fc), .y(fy));

  always_comb begin
    pending = 1'b0;
    for (int i = 0; i < int'(P); i++)
      if (ring_tag[i] != cur_tag) pending = 1'b1;
  end

  // reciprocal seed: exponent 253 - E, mantissa not(M)^2 / 2
  assign nm    = ~hold_q[22:0];
  assign nm_sq = nm * nm;
  assign y0    = {1'b0, 8'(8'd253 - hold_q[30:23]), nm_sq[45:23] >> 1};

  always_comb begin
    fa = ring_val[P-1]; fb = FP32_ONE; fc = '0;
    new_val = ring_val[P-1];
    new_tag = ring_tag[P-1];
    pop = 1'b0;
    start_rescale = 1'b0;
    case (state_q)
      S_ACC: begin
        if (ring_tag[P-1] != cur_tag) begin
          fb = scale_q;
          new_val = fy;
          new_tag = cur_tag;
        end else if (head_valid && head.rescale && !applied_q) begin
          start_rescale = !pending;
        end else if (head_valid) begin
          fc = head.addend;
          new_val = fy;
          pop = 1'b1;
        end
      end
      S_RED: begin
        fc = hold_q;
        new_val = '0;
      end
      S_INV: begin
        if (!inv_step[0]) begin   // t = 2 - den * y
          fa = {~hold_q[31], hold_q[30:0]}; fc = FP32_TWO;
          fb = (inv_step == 2'd0) ? y0 : y_q;
        end else begin            // y = y * t
          fa = y_q; fb = t_q; fc = '0;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_ACC;
      cur_tag   <= '0;
      scale_q   <= FP32_ONE;
      hold_q    <= '0;
      y_q       <= '0;
      t_q       <= '0;
      applied_q <= 1'b0;
      red_cnt   <= '0;
      inv_step  <= '0;
      rescale_cnt <= '0;
      stall_cnt <= '0;
      for (int i = 0; i < int'(P); i++) begin
        ring_val[i] <= '0;
        ring_tag[i] <= '0;
      end
    end else if (clear) begin
      state_q   <= S_ACC;
      cur_tag   <= '0;
      scale_q   <= FP32_ONE;
      hold_q    <= '0;
      applied_q <= 1'b0;
      red_cnt   <= '0;
      inv_step  <= '0;
      for (int i = 0; i < int'(P); i++) begin
        ring_val[i] <= '0;
        ring_tag[i] <= '0;
      end
    end else begin
      // the ring always turns
      ring_val[0] <= new_val;
      ring_tag[0] <= new_tag;
      for (int i = 1; i < int'(P); i++) begin
        ring_val[i] <= ring_val[i-1];
        ring_tag[i] <= ring_tag[i-1];
      end
      if (head_valid && !pop && state_q == S_ACC) stall_cnt <= stall_cnt + 1;
      case (state_q)
        S_ACC: begin
          if (start_rescale) begin
            cur_tag   <= cur_tag + 1'b1;
            scale_q   <= bf16_to_fp32(head.factor);
            applied_q <= 1'b1;
            rescale_cnt <= rescale_cnt + 1;
          end
          if (pop) applied_q <= 1'b0;
          if (finish && !head_valid && !pending && !applied_q) begin
            state_q <= S_RED;
            red_cnt <= '0;
            hold_q  <= '0;
          end
        end
        S_RED: begin
          hold_q  <= fy;
          red_cnt <= red_cnt + 1'b1;
          if (red_cnt == ($clog2(P+1))'(P - 1)) begin
            state_q  <= S_INV;
            inv_step <= '0;
          end
        end
        S_INV: begin
          if (inv_step == 2'd0) y_q <= y0;   // seed ready from den
          if (!inv_step[0]) t_q <= fy;
          else              y_q <= fy;
          inv_step <= inv_step + 1'b1;
          if (inv_step == 2'd3) state_q <= S_DONE;
        end
        default: ;
      endcase
    end
  end

  assign done       = (state_q == S_DONE);
  assign den_o      = hold_q;
  assign recip_o    = y_q;
  assign recip_bf16 = fp32_to_bf16(y_q);
endmodule
