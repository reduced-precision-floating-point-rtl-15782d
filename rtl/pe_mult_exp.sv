// pe_mult_exp: first pipeline stage of a PE row ("Multiplication" and
// "Compute Sign & Exponent"), purely combinational; the caller registers
// the result.
//
// The Bfloat16 activation a and weight w are multiplied as 8x8-bit
// significands. The product exponent e_M = e_a + e_b is formed and compared
// with the exponent e_prev that arrives from the row above. Because the
// row above has not yet normalized its sum, e_prev is the unnormalized
// exponent e-hat_{i-1}, so the difference d'_i = |e_M - e_prev| and the
// comparison m_ge are speculative; they are corrected by exp_fix in the
// next stage. As in the paper, e'_i is not computed as a max: both e_M and
// e_prev are forwarded.
//
// Choices of this design: subnormal inputs are flushed to zero; a zero
// product carries the exponent EXP_ZERO so that it never wins the
// exponent comparison; exponent 255 (Inf/NaN) codes are treated as
// ordinary numbers. e_m is the weight of bit PROD_W-1 of the product,
// which is e_a + e_b + 1 unbiased because 1.f x 1.f lies in [1,4).
module pe_mult_exp
  import sa_pkg::*;
(
  input  bf16_t a,        // activation from the West
  input  bf16_t w,        // stationary weight
  input  exp_t  e_prev,   // e-hat_{i-1} from the fix logic of the row above
  output s1_t   s1        // bundle to register into the second stage
);
  logic [IN_EXP_W-1:0]  ea, eb;
  logic [IN_FRAC_W:0]   ma, mb;
  logic                 zero;
  exp_t                 e_m;
  exp_t                 diff;

  always_comb begin
    ea   = a[IN_W-2 -: IN_EXP_W];
    eb   = w[IN_W-2 -: IN_EXP_W];
    ma   = {1'b1, a[IN_FRAC_W-1:0]};
    mb   = {1'b1, w[IN_FRAC_W-1:0]};
    zero = (ea == '0) || (eb == '0);
    e_m  = zero ? EXP_ZERO
                : exp_t'(ea) + exp_t'(eb) - exp_t'(2 * IN_BIAS) + exp_t'(1);
    diff = e_m - e_prev;

    s1.prod   = zero ? '0 : PROD_W'(ma) * PROD_W'(mb);
    s1.sign   = a[IN_W-1] ^ w[IN_W-1];
    s1.e_m    = e_m;
    s1.e_prev = e_prev;
    s1.m_ge   = (e_m >= e_prev);
    s1.d_spec = s1.m_ge ? diff : -diff;
  end
endmodule
