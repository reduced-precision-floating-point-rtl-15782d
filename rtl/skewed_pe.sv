// skewed_pe: one processing element of the weight-stationary array with
// the skewed floating-point multiply-add pipeline.
//
// Following the paper's grouping, the PE in row i holds the second
// pipeline stage of row i-1 (exp_fix, shifters, adder, leading-zero count)
// and the first stage of row i (multiplier and speculative exponent
// compare, using this PE's stationary weight). The e-hat_{i-1} produced by
// the first part feeds the second part in the same cycle. Every signal
// that crosses to the PE below is a register: the first-stage bundle s1
// of row i and the partial sum of row i-1 with its L_{i-1}. A partial sum
// therefore moves one row per cycle, and a column of R PEs plus one extra
// addition stage finishes its reduction R+1 cycles after row 0 multiplies.
//
// Activations travel West to East through a register (one cycle per PE).
// Weights are preloaded by shifting them down the column while w_load is
// high (one row per cycle); the paper only says that weights are
// pre-loaded, the shift chain is this design's choice.
module skewed_pe
  import sa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  bf16_t a_in,      // activation from the West
  output bf16_t a_out,     // registered activation to the East
  input  logic  w_load,    // shift weights down one row
  input  bf16_t w_in,      // weight from the North during preload
  output bf16_t w_out,     // this PE's weight register, to the South
  input  s1_t   s1_in,     // first-stage registers of row i-1
  input  psum_t ps_in,     // partial sum of row i-2
  output s1_t   s1_out,    // first-stage registers of row i
  output psum_t ps_out     // partial sum of row i-1
);
  exp_t  e_hat_prev;
  s1_t   s1_d;
  bf16_t w_q;

  pe_add_stage u_s2 (
    .clk    (clk),
    .rst_n  (rst_n),
    .s1     (s1_in),
    .ps_in  (ps_in),
    .e_hat  (e_hat_prev),
    .ps_out (ps_out)
  );

  pe_mult_exp u_s1 (
    .a      (a_in),
    .w      (w_q),
    .e_prev (e_hat_prev),
    .s1     (s1_d)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1_out <= S1_ZERO;
      a_out  <= '0;
      w_q    <= '0;
    end else begin
      s1_out <= s1_d;
      a_out  <= a_in;
      if (w_load) w_q <= w_in;
    end

  assign w_out = w_q;
endmodule
