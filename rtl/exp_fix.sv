// exp_fix: the "Fix Sign & Exponent" logic at the input of a PE row's
// second pipeline stage. Combinational.
//
// The first stage compared the product exponent e_M with the unnormalized
// exponent e-hat_{i-1} of the row above, giving d' = |e_M - e-hat_{i-1}|
// and m_ge = (e_M >= e-hat_{i-1}). Now the leading-zero count L_{i-1} of
// that row is known, and the true alignment distance against the
// normalized exponent e_{i-1} = e-hat_{i-1} - L_{i-1} follows the paper's
// two cases:
//   m_ge  : d = d' + L                       (product is larger)
//   !m_ge : d = L - d' (signed)              (product larger iff L >= d')
// From d the block derives the shifts for the retimed normalize/align step
// and e-hat_i, the exponent handed to the next row's first stage.
//
// Own choices: e_hat here is the weight of the sum's carry bit, i.e. the
// paper's e-hat_i plus one. With that convention the incoming partial sum
// needs a net left shift of L - 1 - (product larger ? d : 0); negative
// values mean a right shift. An incoming zero partial sum (lz = SUM_W)
// never wins the comparison. Shift amounts saturate at SUM_W.
module exp_fix
  import sa_pkg::*;
(
  input  s1_t              s1,        // e_M, e-hat_{i-1}, d', m_ge
  input  logic [LZ_W-1:0]  lz_prev,   // L_{i-1}
  output logic             prod_big,  // product exponent >= e_{i-1}
  output logic [EXP_W-1:0] d,         // d_i, corrected alignment distance
  output logic [SH_W-1:0]  prod_rsh,  // right shift of the product
  output logic             inc_left,  // incoming sum shifts left (else right)
  output logic [SH_W-1:0]  inc_sh,    // its shift amount
  output exp_t             e_hat      // e-hat_i (+1, see above)
);
  logic             in_zero;
  logic [EXP_W-1:0] l_ext;
  logic [EXP_W-1:0] prod_rsh_w;
  logic [EXP_W-1:0] inc_sh_w;

  function automatic logic [SH_W-1:0] sat(input logic [EXP_W-1:0] v);
    return (v >= EXP_W'(SUM_W)) ? SH_W'(SUM_W) : SH_W'(v);
  endfunction

  always_comb begin
    in_zero = (lz_prev == LZ_W'(SUM_W));
    l_ext   = EXP_W'(lz_prev);
    if (in_zero) begin
      prod_big   = 1'b1;
      d          = '0;
      prod_rsh_w = '0;
      inc_left   = 1'b0;
      inc_sh_w   = EXP_W'(SUM_W);
    end else if (s1.m_ge) begin
      // d = d' + L; incoming needs L - d - 1 = -(d' + 1): a right shift
      prod_big   = 1'b1;
      d          = s1.d_spec + l_ext;
      prod_rsh_w = '0;
      inc_left   = 1'b0;
      inc_sh_w   = s1.d_spec + 1'b1;
    end else if (l_ext >= s1.d_spec) begin
      // d = L - d' >= 0; incoming net left shift L - d - 1 = d' - 1 (d' >= 1)
      prod_big   = 1'b1;
      d          = l_ext - s1.d_spec;
      prod_rsh_w = '0;
      inc_left   = 1'b1;
      inc_sh_w   = s1.d_spec - 1'b1;
    end else begin
      // incoming is larger: product shifts right by |d| = d' - L,
      // incoming is normalized only, net left shift L - 1
      prod_big   = 1'b0;
      d          = s1.d_spec - l_ext;
      prod_rsh_w = d;
      inc_left   = (lz_prev != '0);
      inc_sh_w   = (lz_prev != '0) ? l_ext - 1'b1 : EXP_W'(1);
    end
    prod_rsh = sat(prod_rsh_w);
    inc_sh   = sat(inc_sh_w);
    e_hat    = (prod_big ? s1.e_m : s1.e_prev - exp_t'(l_ext)) + exp_t'(1);
  end
endmodule
