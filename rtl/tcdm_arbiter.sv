// tcdm_arbiter: shares the cluster interconnect's wide accelerator port
// between the tensor processing engine (TPE, WW words = 512 bits) and
// SoftEx (SW words = 256 bits).
//
// One initiator is forwarded per cycle. When both request, the grant
// alternates (round robin on every contested cycle); a losing initiator
// keeps its request up, per the request/grant protocol. SoftEx's beat uses
// the low SW words of the port and marks only those words valid, so it
// occupies only the banks it addresses. The response (one cycle after the
// grant) is steered back to the initiator that was granted. contend_cnt
// counts contested cycles.
// The arbiter and its port widths are in the published cluster diagram;
// the policy is this implementation's choice.
module tcdm_arbiter #(
  parameter int unsigned WW = 16,   // TPE / port words
  parameter int unsigned SW = 8     // SoftEx words
) (
  input  logic             clk,
  input  logic             rst_n,
  // TPE
  input  logic             t_req,
  output logic             t_gnt,
  input  logic [31:0]      t_addr,
  input  logic             t_we,
  input  logic [WW*4-1:0]  t_be,
  input  logic [WW*32-1:0] t_wdata,
  output logic             t_rvalid,
  output logic [WW*32-1:0] t_rdata,
  // SoftEx
  input  logic             s_req,
  output logic             s_gnt,
  input  logic [31:0]      s_addr,
  input  logic             s_we,
  input  logic [SW*4-1:0]  s_be,
  input  logic [SW*32-1:0] s_wdata,
  output logic             s_rvalid,
  output logic [SW*32-1:0] s_rdata,
  // to the interconnect
  output logic             w_req,
  input  logic             w_gnt,
  output logic [31:0]      w_addr,
  output logic             w_we,
  output logic [WW-1:0]    w_wvalid,
  output logic [WW*4-1:0]  w_be,
  output logic [WW*32-1:0] w_wdata,
  input  logic             w_rvalid,
  input  logic [WW*32-1:0] w_rdata,
  output logic [31:0]      contend_cnt
);
  logic sel_s, prio_s, sel_s_q;

  always_comb begin
    if (t_req && s_req) sel_s = prio_s;
    else                sel_s = s_req;
    w_req    = t_req || s_req;
    w_addr   = sel_s ? s_addr : t_addr;
    w_we     = sel_s ? s_we : t_we;
    w_wvalid = sel_s ? {{(WW-SW){1'b0}}, {SW{1'b1}}} : {WW{1'b1}};
    w_be     = sel_s ? {{(WW-SW)*4{1'b0}}, s_be} : t_be;
    w_wdata  = sel_s ? {{(WW-SW)*32{1'b0}}, s_wdata} : t_wdata;
    t_gnt    = w_gnt && !sel_s && t_req;
    s_gnt    = w_gnt && sel_s;
    t_rvalid = w_rvalid && !sel_s_q;
    s_rvalid = w_rvalid && sel_s_q;
    t_rdata  = w_rdata;
    s_rdata  = w_rdata[SW*32-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_s      <= 1'b1;
      sel_s_q     <= 1'b0;
      contend_cnt <= '0;
    end else begin
      if (w_req && w_gnt) sel_s_q <= sel_s;
      if (t_req && s_req) begin
        contend_cnt <= contend_cnt + 1;
        if (w_gnt) prio_s <= !prio_s;
      end
    end
  end
endmodule
