// tb_pe_add_stage: drives the second stage with random first-stage bundles
// and random unnormalized incoming partial sums (with random leading
// zeros and exponents) and checks, with real arithmetic, that the
// registered partial sum equals product + incoming within the truncation
// bound of the ACC_W-bit operands, that its lz field is its true leading
// zero count and that e_hat (combinational) equals its registered copy.
// Checks the one-cycle latency.
module tb_pe_add_stage;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 0;
  s1_t   s1;
  psum_t ps_in, ps_out;
  exp_t  e_hat;
  int checks = 0, failures = 0;

  pe_add_stage dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real psum_val(input psum_t p);
    exp_t e;
    real v;
    e = p.e_hat;
    v = real'(p.mag) * pow2(int'(e) - int'(SUM_W - 1));
    return p.sign ? -v : v;
  endfunction

  initial begin
    real pv, cv, exact, got, tol;
    exp_t em, ep, eh_comb, eh_q;
    int lz, dd, true_lz, maxw;
    s1 = S1_ZERO; ps_in = PSUM_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // product bundle, with e_m within +-40 of the incoming exponent
      em = exp_t'($signed($urandom_range(100)) - 50);
      ep = exp_t'(int'(em) + $signed($urandom_range(80)) - 40);
      s1.prod   = (n % 29 == 0) ? '0 : {1'b0, 1'b1, 14'($urandom)} << $urandom_range(1);
      s1.sign   = 1'($urandom_range(1));
      s1.e_m    = (s1.prod == '0) ? EXP_ZERO : em;
      s1.e_prev = ep;
      s1.m_ge   = (s1.e_m >= ep);
      s1.d_spec = s1.m_ge ? EXP_W'(s1.e_m - ep) : EXP_W'(ep - s1.e_m);
      // incoming unnormalized sum with lz leading zeros
      lz = (n % 31 == 0) ? int'(SUM_W) : int'($urandom_range(12));
      ps_in.mag   = (lz == int'(SUM_W)) ? '0 : (SUM_W'(1) << (SUM_W - 1 - lz)) | (SUM_W'($urandom) >> (lz + 1));
      ps_in.lz    = LZ_W'(lz);
      ps_in.sign  = 1'($urandom_range(1));
      ps_in.e_hat = ep;
      pv = real'(s1.prod) * pow2(int'(s1.e_m) - 15) * (s1.sign ? -1.0 : 1.0);
      cv = psum_val(ps_in);
      exact = pv + cv;
      // truncation bound: a few units of the lowest kept operand bit
      maxw = (int'(s1.e_m) > int'(ep) - lz) ? int'(s1.e_m) : int'(ep) - lz;
      tol  = pow2(maxw - int'(ACC_W) + 3);
      #1;
      eh_comb = e_hat;
      @(posedge clk);
      #1;
      got  = psum_val(ps_out);
      eh_q = ps_out.e_hat;
      true_lz = int'(SUM_W);
      for (int k = 0; k < int'(SUM_W); k++) if (ps_out.mag[k]) true_lz = int'(SUM_W) - 1 - k;
      check(fabs(got - exact) <= tol, $sformatf("sum got=%g exact=%g", got, exact));
      check(int'(ps_out.lz) == true_lz, "lz");
      check(eh_q == eh_comb, "e_hat registered");
      if (exact != 0.0 && lz < 8 && s1.prod != '0) begin
        // result must not lose its leading bits: top weight matches max+1
        dd = int'(eh_q) - (maxw + 1);
        check(dd == 0, "e_hat = max(e_m, e_prev - L) + 1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
