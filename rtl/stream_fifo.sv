// stream_fifo: synchronous FIFO with a ready/valid handshake on both sides.
//
// Used wherever the SoftEx datapath decouples two stages: in front of the
// lanes (input scores), in front of the denominator accumulator and in
// front of the streamer sink. A word is written when in_valid && in_ready
// and read when out_valid && out_ready; both may happen in one cycle.
// in_ready is low only when the FIFO is full (no same-cycle pass-through of
// a full FIFO), out_valid is high whenever it is not empty, so the head is
// visible with zero latency. The depth is a parameter; the published
// figures show FIFOs but not their depth.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (clear) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  // a pop must never see an empty FIFO, a push never a full one
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);
  assert property (@(posedge clk) disable iff (!rst_n) (count <= ($clog2(DEPTH+1))'(DEPTH)));
endmodule
