// softex_ctrl: SoftEx programming interface (register file) and control FSM.
//
// Control target: a simple 32-bit request/grant slave for the cores'
// peripheral interconnect. Requests are always granted; reads return
// on rdata with rvalid one cycle later. Register map in softex_pkg
// (word offsets: TRIGGER, STATUS, IN_ADDR, OUT_ADDR, LEN, MODE, A_ADDR,
// B_ADDR, NW, CYCLES); addr is the byte offset inside the target.
// Writing TRIGGER while idle starts a job:
//   softmax : ACCUM pass (source reads the vector; running max and
//             denominator), then den_finish until the reciprocal is ready,
//             then NORM pass (source re-reads the vector, sink writes the
//             probabilities).
//   sum-exp : the source reads the a weights (one beat) and the b weights
//             (one beat), then the input vector (holding x^2, written by the
//             cores) while the sink writes sum_i a_i expp(b_i x^2).
// At the end evt_done pulses for one cycle and CYCLES holds the job's
// length in cycles. The published design names a register file and an
// FSM; the registers, the job sequence and the event are this
// implementation's choices.
module softex_ctrl
  import softex_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // control target
  input  logic          cfg_req,
  output logic          cfg_gnt,
  input  logic [31:0]   cfg_addr,
  input  logic          cfg_we,
  input  logic [31:0]   cfg_wdata,
  output logic          cfg_rvalid,
  output logic [31:0]   cfg_rdata,
  // to datapath
  output logic          clear,
  output softex_phase_e phase,
  output logic [$clog2(N):0] nw,
  output logic          den_finish,
  input  logic          den_done,
  input  logic          dp_empty,
  // to streamer
  output logic          src_start,
  output logic [31:0]   src_addr,
  output logic [31:0]   src_len,
  input  logic          src_done,
  input  logic          src_empty,
  output logic          snk_start,
  output logic [31:0]   snk_addr,
  output logic [31:0]   snk_len,
  input  logic          snk_done,
  // status
  output logic          busy,
  output logic          evt_done
);
  typedef enum logic [3:0] {
    C_IDLE, C_ACC_START, C_ACC_RUN, C_ACC_FIN, C_NORM_START, C_NORM_RUN,
    C_WA_START, C_WA_RUN, C_WB_START, C_WB_RUN, C_SE_START, C_SE_RUN, C_DONE
  } cstate_e;

  logic [31:0] regs [NUM_REGS];
  cstate_e     st_q;
  logic [31:0] cyc_q;
  logic [3:0]  widx;
  logic        trigger;

  assign cfg_gnt = 1'b1;
  assign widx    = cfg_addr[5:2];
  assign trigger = cfg_req && cfg_we && widx == 4'(REG_TRIGGER);
  assign busy    = (st_q != C_IDLE);
  assign nw      = ($clog2(N)+1)'(regs[REG_NW]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NUM_REGS); i++) regs[i] <= '0;
      cfg_rvalid <= 1'b0;
      cfg_rdata  <= '0;
    end else begin
      cfg_rvalid <= cfg_req && !cfg_we;
      if (cfg_req && cfg_we && widx < 4'(NUM_REGS) &&
          widx != 4'(REG_STATUS) && widx != 4'(REG_CYCLES) && !busy)
        regs[widx] <= cfg_wdata;
      if (cfg_req && !cfg_we) begin
        if (widx == 4'(REG_STATUS))      cfg_rdata <= {31'd0, busy};
        else if (widx == 4'(REG_CYCLES)) cfg_rdata <= cyc_q;
        else if (widx < 4'(NUM_REGS))    cfg_rdata <= regs[widx];
        else                             cfg_rdata <= '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= C_IDLE;
      cyc_q <= '0;
    end else begin
      if (busy && st_q != C_DONE) cyc_q <= cyc_q + 1;
      case (st_q)
        C_IDLE: if (trigger) begin
          cyc_q <= '0;
          st_q  <= (regs[REG_MODE][0] == MODE_SUMEXP) ? C_WA_START : C_ACC_START;
        end
        C_ACC_START:  st_q <= C_ACC_RUN;
        C_ACC_RUN:    if (src_empty && dp_empty) st_q <= C_ACC_FIN;
        C_ACC_FIN:    if (den_done) st_q <= C_NORM_START;
        C_NORM_START: st_q <= C_NORM_RUN;
        C_NORM_RUN:   if (snk_done && dp_empty) st_q <= C_DONE;
        C_WA_START:   st_q <= C_WA_RUN;
        C_WA_RUN:     if (src_done) st_q <= C_WB_START;
        C_WB_START:   st_q <= C_WB_RUN;
        C_WB_RUN:     if (src_done) st_q <= C_SE_START;
        C_SE_START:   st_q <= C_SE_RUN;
        C_SE_RUN:     if (snk_done && dp_empty) st_q <= C_DONE;
        C_DONE:       st_q <= C_IDLE;
        default:      st_q <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    clear      = (st_q == C_IDLE) && trigger;
    src_start  = 1'b0;
    snk_start  = 1'b0;
    src_addr   = regs[REG_IN_ADDR];
    src_len    = regs[REG_LEN];
    snk_addr   = regs[REG_OUT_ADDR];
    snk_len    = regs[REG_LEN];
    den_finish = (st_q == C_ACC_FIN);
    evt_done   = (st_q == C_DONE);
    case (st_q)
      C_ACC_START, C_ACC_RUN, C_ACC_FIN: phase = PH_ACCUM;
      C_NORM_START, C_NORM_RUN:          phase = PH_NORM;
      C_WA_START, C_WA_RUN, C_WB_START, C_WB_RUN,
      C_SE_START, C_SE_RUN:              phase = PH_SUMEXP;
      default:                           phase = PH_IDLE;
    endcase
    case (st_q)
      C_ACC_START, C_NORM_START: src_start = 1'b1;
      C_WA_START: begin src_start = 1'b1; src_addr = regs[REG_A_ADDR]; src_len = regs[REG_NW]; end
      C_WB_START: begin src_start = 1'b1; src_addr = regs[REG_B_ADDR]; src_len = regs[REG_NW]; end
      C_SE_START: src_start = 1'b1;
      default: ;
    endcase
    snk_start = (st_q == C_NORM_START) || (st_q == C_SE_START);
  end
endmodule
