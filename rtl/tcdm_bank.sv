// tcdm_bank: one bank of the cluster's tightly-coupled data memory (L1).
//
// A 32-bit wide single-port memory with byte enables and one cycle read
// latency: a request in cycle t (req, we, be, addr, wdata) writes at the
// clock edge, or returns the addressed word on rdata in cycle t+1. The
// cluster has 32 such banks of 8 KiB (2048 words), 256 KiB in total. In
// silicon the bank is an SRAM macro; here it is a plain array, which
// synthesis maps to a memory. Contents are not reset.
module tcdm_bank #(
  parameter int unsigned WORDS = 2048
) (
  input  logic                     clk,
  input  logic                     req,
  input  logic                     we,
  input  logic [3:0]               be,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) begin
        for (int i = 0; i < 4; i++)
          if (be[i]) mem[addr][8*i +: 8] <= wdata[8*i +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
