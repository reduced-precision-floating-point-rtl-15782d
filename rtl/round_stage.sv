// round_stage: the rounding stage at the South end of every column.
//
// Takes the unnormalized partial sum of the last row (magnitude, sign,
// e-hat and L) and finishes what the PEs left undone: the exponent
// correction e = e-hat - L, the normalizing left shift by L, and a single
// rounding to FP32 (round to nearest, ties to even; the only rounding in
// the whole reduction). Registered: the FP32 result appears one cycle
// after its input.
//
// Own choices: results below the smallest FP32 normal are flushed to a
// signed zero, results above the largest finite value become infinity,
// a zero magnitude gives +0.
module round_stage
  import sa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  psum_t ps_in,
  output fp32_t result
);
  logic [SUM_W-1:0]      norm;
  logic [OUT_FRAC_W-1:0] frac;
  logic                  guard, sticky, up;
  logic [OUT_FRAC_W+1:0] mant;     // 1.f plus carry of the rounding
  exp_t                  e_lead, e_biased;
  fp32_t                 res_d;

  localparam int unsigned LOW_W = SUM_W - 2 - OUT_FRAC_W;   // bits below the guard bit

  always_comb begin
    norm     = ps_in.mag << ps_in.lz;
    e_lead   = ps_in.e_hat - exp_t'(ps_in.lz);
    frac     = norm[SUM_W-2 -: OUT_FRAC_W];
    guard    = norm[LOW_W];
    sticky   = |norm[LOW_W-1:0];
    up       = guard & (sticky | frac[0]);
    mant     = {2'b01, frac} + (OUT_FRAC_W+2)'(up);
    e_biased = e_lead + exp_t'(OUT_BIAS) + (mant[OUT_FRAC_W+1] ? exp_t'(1) : exp_t'(0));
    if (ps_in.mag == '0)
      res_d = '0;
    else if (e_biased >= exp_t'(255))
      res_d = {ps_in.sign, 8'hFF, 23'd0};
    else if (e_biased <= exp_t'(0))
      res_d = {ps_in.sign, 31'd0};
    else
      res_d = {ps_in.sign, e_biased[OUT_EXP_W-1:0],
               mant[OUT_FRAC_W+1] ? mant[OUT_FRAC_W:1] : mant[OUT_FRAC_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) result <= '0;
    else        result <= res_d;
endmodule
