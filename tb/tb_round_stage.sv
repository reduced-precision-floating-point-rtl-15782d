// tb_round_stage: feeds random unnormalized partial sums and checks the
// FP32 result with real arithmetic: it must be the nearest FP32 value
// (within half an ulp; on an exact tie the even one), with overflow to
// infinity, flush of tiny results to zero and +0 for a zero sum. Checks
// the one-cycle latency.
module tb_round_stage;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 0;
  psum_t ps_in;
  fp32_t result;
  int checks = 0, failures = 0;
  int n_up = 0, n_tie = 0, n_inf = 0, n_ftz = 0;

  round_stage dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s mag=%h lz=%0d e_hat=%0d -> %h", what, ps_in.mag, ps_in.lz, ps_in.e_hat, result);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, r, ulp, err;
    int lz, e, el;
    ps_in = PSUM_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      lz = (n % 53 == 0) ? int'(SUM_W) : int'($urandom_range(SUM_W - 1));
      ps_in.mag  = (lz == int'(SUM_W)) ? '0 : (SUM_W'(1) << (SUM_W - 1 - lz)) | (SUM_W'($urandom) >> (lz + 1));
      if (n % 7 == 0 && lz <= int'(SUM_W) - 25) begin   // force an exact tie
        int g;
        g = int'(SUM_W) - 1 - lz - 24;                      // guard bit position
        ps_in.mag = (ps_in.mag >> (g + 1)) << (g + 1);
        ps_in.mag[g] = 1'b1;
      end
      ps_in.lz   = LZ_W'(lz);
      ps_in.sign = 1'($urandom_range(1));
      e = (n % 11 == 0) ? $signed($urandom_range(560)) - 280 : $signed($urandom_range(200)) - 100;
      ps_in.e_hat = exp_t'(e);
      v = real'(ps_in.mag) * pow2(e - int'(SUM_W - 1)) * (ps_in.sign ? -1.0 : 1.0);
      @(posedge clk);
      #1;
      el = e - lz;                       // weight of the leading one
      if (lz == int'(SUM_W)) begin
        check(result == 32'h0, "zero");
      end else if (result[30:23] == 8'hFF) begin
        n_inf++;
        check(result[22:0] == 0 && result[31] == ps_in.sign, "infinity code");
        check(fabs(v) >= pow2(128) * (1.0 - pow2(-25)), "overflow only when too large");
      end else if (result[30:0] == 0) begin
        n_ftz++;
        check(fabs(v) < pow2(-126), "flush only when tiny");
        check(result[31] == ps_in.sign, "flushed sign");
      end else begin
        r   = fp32_to_real(result);
        ulp = pow2(int'(result[30:23]) - 127 - 23);
        err = fabs(r - v);
        check(err <= ulp / 2.0, $sformatf("nearest r=%g v=%g", r, v));
        if (err == ulp / 2.0) begin
          n_tie++;
          check(result[0] == 1'b0, "tie to even");
        end
        if (fabs(r) > fabs(v)) n_up++;
        check(el > -127 && el < 129, "range");
      end
    end
    check(n_up > 0 && n_tie > 0 && n_inf > 0 && n_ftz > 0, "all rounding cases seen");
    $display("round up=%0d ties=%0d inf=%0d ftz=%0d", n_up, n_tie, n_inf, n_ftz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
