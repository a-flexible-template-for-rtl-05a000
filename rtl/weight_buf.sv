// weight_buf: buffer of the N_w BF16 weights (a or b) of the sum of
// exponentials, with the ping-pong read order.
//
// One memory beat (N BF16 values) is written with `load`; the first nw of
// them are used. Each `next` advances the read index. When one pass over
// the weights ends, the next pass reads them in reverse order (0,1,..,nw-1,
// nw-1,..,1,0,0,1,..), so the weights never have to be fetched again; the
// sum is unchanged because the accumulation is exact in fixed point.
// w is the weight at the read index, last flags the final weight of a
// pass. `restart` goes back to index 0, forward. Depth = one beat (N
// entries) is this implementation's choice; the figure gives the 16-bit
// width.
module weight_buf
  import softex_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  bf16_t                load_data [N],
  input  logic                 restart,
  input  logic                 next,
  input  logic [$clog2(N):0]   nw,
  output bf16_t                w,
  output logic                 last
);
  localparam int unsigned IW = $clog2(N);
  bf16_t          buf_q [N];
  logic [IW-1:0]  idx;
  logic           rev;

  assign w    = buf_q[idx];
  assign last = rev ? (idx == '0) : ({1'b0, idx} == nw - 1'b1);

  always_ff @(posedge clk) begin
    if (load)
      for (int i = 0; i < int'(N); i++) buf_q[i] <= load_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      rev <= 1'b0;
    end else if (restart) begin
      idx <= '0;
      rev <= 1'b0;
    end else if (next) begin
      if (last) rev <= !rev;                 // index stays: pass reverses
      else if (rev) idx <= idx - 1'b1;
      else idx <= idx + 1'b1;
    end
  end
endmodule
