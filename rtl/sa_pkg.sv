// sa_pkg: number formats, widths and pipeline bundles shared by the
// skewed-pipeline floating-point systolic array.
//
// Inputs (activations and weights) are Bfloat16: 1 sign, 8 exponent and
// 7 fraction bits. Partial sums travel down each column in an
// unnormalized sign-magnitude form that keeps at least FP32 precision and
// are rounded to FP32 once, at the bottom of the column. The partial-sum
// representation is this design's own choice:
//   * mag   : SUM_W-bit magnitude (operand width ACC_W plus one carry bit)
//   * e_hat : signed exponent = weight of bit SUM_W-1 of mag
//   * lz    : leading-zero count of mag (SUM_W when mag is zero)
// so the value is mag * 2^(e_hat - (SUM_W-1)) and e_hat - lz is the weight
// of the leading one (the normalized exponent).
package sa_pkg;

  // Bfloat16 input format
  localparam int unsigned IN_EXP_W  = 8;
  localparam int unsigned IN_FRAC_W = 7;
  localparam int unsigned IN_W      = 1 + IN_EXP_W + IN_FRAC_W;   // 16
  localparam int unsigned IN_BIAS   = 127;

  // FP32 output format
  localparam int unsigned OUT_EXP_W  = 8;
  localparam int unsigned OUT_FRAC_W = 23;
  localparam int unsigned OUT_W      = 32;
  localparam int unsigned OUT_BIAS   = 127;

  // significand product of two 1.f numbers: 2*(IN_FRAC_W+1) bits
  localparam int unsigned PROD_W = 2 * (IN_FRAC_W + 1);             // 16
  // aligned adder operand width and partial-sum width (operand + carry)
  localparam int unsigned ACC_W  = 28;
  localparam int unsigned SUM_W  = ACC_W + 1;                        // 29
  // leading-zero count width (must hold SUM_W)
  localparam int unsigned LZ_W   = $clog2(SUM_W + 1);                // 5
  // shift amount width; any amount >= SUM_W clears the operand
  localparam int unsigned SH_W   = LZ_W + 1;                         // 6
  // internal signed exponent width, wide enough that no exponent
  // arithmetic in the column can wrap
  localparam int unsigned EXP_W  = 12;
  // exponent carried by a zero product / zero partial sum
  localparam logic signed [EXP_W-1:0] EXP_ZERO = -12'sd1024;

  typedef logic [IN_W-1:0]  bf16_t;
  typedef logic [OUT_W-1:0] fp32_t;
  typedef logic signed [EXP_W-1:0] exp_t;

  // Registers between the first stage of row i and the second stage of
  // row i (the "e'_i, d'_i" bundle of the skewed pipeline).
  typedef struct packed {
    logic [PROD_W-1:0] prod;     // significand product, MSB weight = e_m
    logic              sign;     // product sign
    exp_t              e_m;      // e_M_i: product exponent
    exp_t              e_prev;   // e-hat_{i-1}: forwarded unnormalized exponent
    logic [EXP_W-1:0]  d_spec;   // d'_i = |e_m - e_prev|
    logic              m_ge;     // e_m >= e_prev (sign of the speculative difference)
  } s1_t;

  // Partial sum leaving the second stage of a row (registered).
  typedef struct packed {
    logic [SUM_W-1:0] mag;
    logic             sign;
    logic [LZ_W-1:0]  lz;       // L_i
    exp_t             e_hat;    // e-hat_i (weight of mag's top bit)
  } psum_t;

  localparam s1_t S1_ZERO = '{prod: '0, sign: 1'b0, e_m: EXP_ZERO,
                              e_prev: EXP_ZERO, d_spec: '0, m_ge: 1'b1};
  localparam psum_t PSUM_ZERO = '{mag: '0, sign: 1'b0, lz: LZ_W'(SUM_W),
                                  e_hat: EXP_ZERO};

endpackage
