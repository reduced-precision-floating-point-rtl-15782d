// pe_add_stage: second pipeline stage of one PE row of the skewed
// pipeline: Fix Sign & Exponent, the merged normalize/align shifters,
// the adder and the leading-zero count, followed by the stage register.
//
// Inputs are all registers of the row above: the first-stage bundle s1 of
// this row (product, e_M, e-hat_{i-1}, d', m_ge) and the unnormalized
// partial sum of the row above with its L_{i-1}. In the same cycle it
// drives e_hat (e-hat_i) combinationally to the first stage of the next
// row, which is what lets the two rows' stages overlap. At the clock edge
// it registers the new unnormalized partial sum, its L_i and e-hat_i.
// Latency: one cycle. The same module, without a following first stage,
// is the extra addition stage at the bottom of every column.
module pe_add_stage
  import sa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  s1_t   s1,        // first-stage registers of this row
  input  psum_t ps_in,     // partial sum of the row above (registered)
  output exp_t  e_hat,     // e-hat_i, combinational, to the next row
  output psum_t ps_out     // registered partial sum of this row
);
  logic             prod_big;
  logic [EXP_W-1:0] d;
  logic [SH_W-1:0]  prod_rsh, inc_sh;
  logic             inc_left;
  logic [ACC_W-1:0] op_p, op_c;
  psum_t            ps_d;

  exp_fix u_fix (
    .s1       (s1),
    .lz_prev  (ps_in.lz),
    .prod_big (prod_big),
    .d        (d),
    .prod_rsh (prod_rsh),
    .inc_left (inc_left),
    .inc_sh   (inc_sh),
    .e_hat    (e_hat)
  );

  norm_align u_shift (
    .prod     (s1.prod),
    .prod_rsh (prod_rsh),
    .inc_mag  (ps_in.mag),
    .inc_left (inc_left),
    .inc_sh   (inc_sh),
    .op_p     (op_p),
    .op_c     (op_c)
  );

  add_lza u_add (
    .op_p   (op_p),
    .sign_p (s1.sign),
    .op_c   (op_c),
    .sign_c (ps_in.sign),
    .mag    (ps_d.mag),
    .sign   (ps_d.sign),
    .lz     (ps_d.lz)
  );

  assign ps_d.e_hat = e_hat;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ps_out <= PSUM_ZERO;
    else        ps_out <= ps_d;
endmodule
