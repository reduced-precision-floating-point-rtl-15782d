// tb_exp_fix: checks the exponent fix logic against the direct definition
// of what it must produce: with e = e_prev - L the normalized exponent of
// the incoming sum and M = max(e_m, e), e_hat must be M + 1, d must be
// |e_m - e|, the product must shift right by M - e_m, and the incoming
// sum must shift (left positive) by e_prev - M - 1; shifts saturate at
// SUM_W. A zero incoming sum (L = SUM_W) must leave the product unshifted.
module tb_exp_fix;
  import sa_pkg::*;

  s1_t              s1;
  logic [LZ_W-1:0]  lz;
  logic             prod_big, inc_left;
  logic [EXP_W-1:0] d;
  logic [SH_W-1:0]  prod_rsh, inc_sh;
  exp_t             e_hat;
  int checks = 0, failures = 0;
  int cases [4];

  exp_fix dut (.s1(s1), .lz_prev(lz), .prod_big(prod_big), .d(d),
               .prod_rsh(prod_rsh), .inc_left(inc_left), .inc_sh(inc_sh),
               .e_hat(e_hat));

  function automatic int sat(input int v);
    return (v >= int'(SUM_W)) ? int'(SUM_W) : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s e_m=%0d e_prev=%0d L=%0d", what, s1.e_m, s1.e_prev, lz);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int em, ep, l, e, m, net;
    for (int n = 0; n < 5000; n++) begin
      em = $signed($urandom_range(80)) - 40;
      ep = $signed($urandom_range(80)) - 40;
      l  = (n % 23 == 0) ? int'(SUM_W) : int'($urandom_range(SUM_W - 1));
      s1 = '0;
      s1.e_m    = exp_t'(em);
      s1.e_prev = exp_t'(ep);
      s1.m_ge   = (em >= ep);
      s1.d_spec = EXP_W'((em >= ep) ? em - ep : ep - em);
      lz = LZ_W'(l);
      #1;
      if (l == int'(SUM_W)) begin
        cases[0]++;
        check(prod_big && prod_rsh == 0 && int'(e_hat) == em + 1, "zero incoming");
        check(int'(inc_sh) == int'(SUM_W), "zero incoming is cleared");
      end else begin
        e = ep - l;
        m = (em >= e) ? em : e;
        if (em >= ep) cases[1]++; else if (em >= e) cases[2]++; else cases[3]++;
        check(int'(e_hat) == m + 1, "e_hat");
        check(prod_big == (em >= e), "prod_big");
        check(int'(d) == ((em >= e) ? em - e : e - em), "d");
        check(int'(prod_rsh) == sat(m - em), "prod_rsh");
        net = ep - m - 1;
        if (net >= 0) check(inc_left && int'(inc_sh) == sat(net) || (net == 0 && int'(inc_sh) == 0), "incoming left shift");
        else          check(!inc_left && int'(inc_sh) == sat(-net), "incoming right shift");
      end
    end
    for (int k = 0; k < 4; k++) check(cases[k] > 0, "case covered");
    $display("cases: zero=%0d spec_ge=%0d L>=d'=%0d L<d'=%0d", cases[0], cases[1], cases[2], cases[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
