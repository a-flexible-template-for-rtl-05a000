// softex_pkg: types, constants and small arithmetic helpers shared by the
// SoftEx softmax / sum-of-exponentials accelerator and the cluster around it.
//
// Number formats: BF16 (1 sign, 8 exponent, 7 mantissa bits) on the vector
// datapath, FP32 (1/8/23) in the denominator accumulator and the adder tree.
// The expp correction constants are the values quoted with the algorithm
// (alpha = 0.21875, beta = 0.4375, gamma1 = 3.296875, gamma2 = 2.171875);
// they are stored as small integers with a fixed power-of-two scale.
// The register map, the operating modes and the sizes of the cluster
// memory are this implementation's own choices unless noted.
package softex_pkg;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  localparam bf16_t BF16_ONE     = 16'h3F80;
  localparam bf16_t BF16_NEG_INF = 16'hFF80;
  localparam bf16_t BF16_POS_INF = 16'h7F80;
  localparam fp32_t FP32_ONE     = 32'h3F80_0000;
  localparam fp32_t FP32_TWO     = 32'h4000_0000;

  // expp polynomial correction constants (value = integer * 2^-shift)
  localparam int unsigned EXPP_ALPHA     = 7;    // 0.21875  = 7 * 2^-5
  localparam int unsigned EXPP_ALPHA_SH  = 5;
  localparam int unsigned EXPP_BETA      = 7;    // 0.4375   = 7 * 2^-4
  localparam int unsigned EXPP_BETA_SH   = 4;
  localparam int unsigned EXPP_GAMMA1    = 211;  // 3.296875 = 211 * 2^-6
  localparam int unsigned EXPP_GAMMA2    = 139;  // 2.171875 = 139 * 2^-6
  // 1/ln(2) with 14 fractional bits: round(1.4426950408889634 * 2^14)
  localparam int unsigned INV_LN2_Q14    = 23637;

  // Operating modes of the accelerator
  typedef enum logic [0:0] {
    MODE_SOFTMAX = 1'b0,
    MODE_SUMEXP  = 1'b1
  } softex_mode_e;

  // Datapath phases, driven by the controller
  typedef enum logic [1:0] {
    PH_IDLE   = 2'd0,
    PH_ACCUM  = 2'd1,   // softmax: running max + denominator
    PH_NORM   = 2'd2,   // softmax: expp(x-max) * 1/den
    PH_SUMEXP = 2'd3    // GELU helper: sum_i a_i * expp(b_i * x)
  } softex_phase_e;

  // Register map of the control target (word offsets)
  localparam int unsigned REG_TRIGGER = 0;  // write: start a job
  localparam int unsigned REG_STATUS  = 1;  // read : bit0 busy
  localparam int unsigned REG_IN_ADDR = 2;  // input vector base (bytes)
  localparam int unsigned REG_OUT_ADDR= 3;  // output vector base (bytes)
  localparam int unsigned REG_LEN     = 4;  // vector length (elements)
  localparam int unsigned REG_MODE    = 5;  // 0 softmax, 1 sum of exp
  localparam int unsigned REG_A_ADDR  = 6;  // a weights base (bytes)
  localparam int unsigned REG_B_ADDR  = 7;  // b weights base (bytes)
  localparam int unsigned REG_NW      = 8;  // number of weights N_w
  localparam int unsigned REG_CYCLES  = 9;  // read: cycles of last job
  localparam int unsigned NUM_REGS    = 10;

  // BF16 ordering (no NaN): returns 1 when a > b
  function automatic logic bf16_gt(input bf16_t a, input bf16_t b);
    logic a_neg, b_neg;
    a_neg = a[15];
    b_neg = b[15];
    if (a_neg != b_neg)
      return (!a_neg) && ((a[14:0] != 15'd0) || (b[14:0] != 15'd0));
    else if (!a_neg)
      return a[14:0] > b[14:0];
    else
      return a[14:0] < b[14:0];
  endfunction

  // Widening BF16 -> FP32 (the "zero pad" of the datapath)
  function automatic fp32_t bf16_to_fp32(input bf16_t a);
    return {a, 16'h0000};
  endfunction

  // Narrowing FP32 -> BF16 by truncation of the low mantissa bits
  function automatic bf16_t fp32_to_bf16(input fp32_t a);
    return a[31:16];
  endfunction

endpackage
