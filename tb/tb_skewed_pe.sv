// tb_skewed_pe: checks one PE in isolation. The weight register must load
// only under w_load and appear on w_out; the activation must appear on
// a_out one cycle later. Two PEs are then chained (the second one's
// first-stage bundle and partial sum come from the first) so that the
// second PE's add part combines the first PE's product with a zero sum,
// and its s1_out carries the e-hat it computed in the same cycle. The
// products and sums are checked with real arithmetic.
module tb_skewed_pe;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 0;
  bf16_t a0, a1, a0_out, a1_out, w0_in, w0_out, w1_out;
  logic  w_load;
  s1_t   s1_0, s1_1;
  psum_t ps_0, ps_1;
  int checks = 0, failures = 0;

  skewed_pe u0 (.clk, .rst_n, .a_in(a0), .a_out(a0_out), .w_load, .w_in(w0_in),
                .w_out(w0_out), .s1_in(S1_ZERO), .ps_in(PSUM_ZERO),
                .s1_out(s1_0), .ps_out(ps_0));
  skewed_pe u1 (.clk, .rst_n, .a_in(a1), .a_out(a1_out), .w_load, .w_in(w0_out),
                .w_out(w1_out), .s1_in(s1_0), .ps_in(ps_0),
                .s1_out(s1_1), .ps_out(ps_1));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real s1_val(input s1_t s);
    exp_t e;
    e = s.e_m;
    return real'(s.prod) * pow2(int'(e) - 15) * (s.sign ? -1.0 : 1.0);
  endfunction

  function automatic real ps_val(input psum_t p);
    exp_t e;
    e = p.e_hat;
    return real'(p.mag) * pow2(int'(e) - int'(SUM_W - 1)) * (p.sign ? -1.0 : 1.0);
  endfunction

  initial begin
    bf16_t wa, wb;
    real p0, p1, got, tol;
    a0 = '0; a1 = '0; w_load = 0; w0_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      wa = rand_bf16(-30, 30);
      wb = rand_bf16(-30, 30);
      // preload: wb goes first and ends in u1, wa in u0
      @(negedge clk); w_load = 1; w0_in = wb;
      @(negedge clk); w0_in = wa;
      @(negedge clk); w_load = 0; w0_in = rand_bf16(-3, 3);
      check(w0_out == wa && w1_out == wb, "weights shifted down");
      @(negedge clk);
      check(w0_out == wa, "weight held without w_load");
      // row 0 multiplies in this cycle
      a0 = rand_bf16(-30, 30);
      p0 = bf16_to_real(a0) * bf16_to_real(wa);
      @(negedge clk);
      check(a0_out == a0, "activation forwarded after one cycle");
      check(s1_val(s1_0) == p0, "first-stage product");
      // row 1 multiplies one cycle later, while u1 adds row 0
      a1 = rand_bf16(-30, 30);
      p1 = bf16_to_real(a1) * bf16_to_real(wb);
      @(negedge clk);
      check(s1_val(s1_1) == p1, "second PE product");
      check(ps_val(ps_1) == p0, "second PE adds row 0 product to zero sum");
      begin
        exp_t eh, ep;
        eh = ps_1.e_hat; ep = s1_1.e_prev;
        check(eh == ep, "e-hat forwarded to the next row in the same cycle");
      end
      a0 = '0; a1 = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
