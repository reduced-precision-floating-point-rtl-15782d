// norm_align: the retimed normalize/align shifters of a PE row's second
// stage. Combinational.
//
// The incoming partial sum from the row above is still unnormalized. Its
// normalization by L_{i-1} and its alignment to the product are merged
// into one shift whose direction exp_fix has already decided: left
// (normalize dominates) or right (align dominates). The left and right
// shifters work side by side and a multiplexer picks one, so the two
// steps are in parallel rather than in series. The product only ever
// shifts right or not at all. Both results are ACC_W-bit operands whose
// MSB has the weight max(e_M, e_{i-1}); the bit below the LSB and all
// lower bits are dropped (truncation: rounding happens only once, at the
// bottom of the column).
module norm_align
  import sa_pkg::*;
(
  input  logic [PROD_W-1:0] prod,
  input  logic [SH_W-1:0]   prod_rsh,
  input  logic [SUM_W-1:0]  inc_mag,
  input  logic              inc_left,
  input  logic [SH_W-1:0]   inc_sh,
  output logic [ACC_W-1:0]  op_p,     // aligned product
  output logic [ACC_W-1:0]  op_c      // normalized and aligned incoming sum
);
  logic [ACC_W-1:0] prod_ext;
  logic [SUM_W-1:0] shl, shr;

  always_comb begin
    prod_ext = {prod, {(ACC_W-PROD_W){1'b0}}};
    op_p     = (prod_rsh >= SH_W'(ACC_W)) ? '0 : prod_ext >> prod_rsh;
    shl      = (inc_sh >= SH_W'(SUM_W)) ? '0 : inc_mag << inc_sh;
    shr      = (inc_sh >= SH_W'(SUM_W)) ? '0 : inc_mag >> inc_sh;
    op_c     = inc_left ? shl[ACC_W-1:0] : shr[ACC_W-1:0];
  end
endmodule
