// tb_pe_mult_exp: checks the first-stage multiplier and speculative
// exponent compare against real arithmetic: the product bundle must
// represent exactly a*w (prod * 2^(e_m-15)), and d'/m_ge must match the
// exponent difference to the forwarded e_prev. Zero and subnormal
// operands must give a zero product carrying EXP_ZERO.
module tb_pe_mult_exp;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  bf16_t a, w;
  exp_t  e_prev;
  s1_t   s1;
  int    checks = 0, failures = 0;

  pe_mult_exp dut (.a(a), .w(w), .e_prev(e_prev), .s1(s1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s a=%h w=%h e_prev=%0d prod=%h e_m=%0d d=%0d ge=%b",
               what, a, w, e_prev, s1.prod, s1.e_m, s1.d_spec, s1.m_ge);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exact, got;
    int  diff;
    exp_t em;
    for (int n = 0; n < 2000; n++) begin
      a = rand_bf16(-126, 127);
      w = rand_bf16(-126, 127);
      if (n % 17 == 0) a[14:7] = 8'd0;           // zero / subnormal operand
      e_prev = exp_t'($signed($urandom_range(1200)) - 600);
      #1;
      exact = bf16_to_real(a) * bf16_to_real(w);
      em    = s1.e_m;
      got   = real'(s1.prod) * pow2(int'(em) - 15);
      if (exact == 0.0) begin
        check(s1.prod == '0 && s1.e_m == EXP_ZERO, "zero product");
      end else begin
        check(got == fabs(exact), $sformatf("product value got=%g exact=%g", got, exact));
        check(s1.sign == (exact < 0.0), "product sign");
        check(s1.prod[PROD_W-1] | s1.prod[PROD_W-2], "product leading one in top two bits");
      end
      diff = int'(em) - int'(e_prev);
      check(s1.m_ge == (diff >= 0), "m_ge");
      check(int'(s1.d_spec) == ((diff >= 0) ? diff : -diff), "d_spec");
      check(s1.e_prev == e_prev, "e_prev forwarded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
