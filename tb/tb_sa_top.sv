// tb_sa_top: end-to-end test of the accelerator tile at a reduced size
// (8x8 array, 32-entry buffers). Three matrix multiplications run back
// to back through the host ports: random weights and activations over a
// wide exponent range, small integers (bit-exact results), and a case
// built to cancel exactly and to overflow FP32. Every output word is read
// back and compared with a real-valued reference; the start-to-done
// cycle count (from the cycle start is high to the cycle done is high) is checked against ROWS + num_vec + (ROWS+COLS+2) + 2.
// Probes inside the array count how often each mechanism of the skewed
// pipeline fired: the three cases of the exponent fix plus the zero
// bypass, left (normalize) and right (align) shifts of the incoming sum,
// product alignment shifts, exact cancellation in a PE, rounding up at
// the column end, overflow to infinity and weight preload. A mechanism
// that never fired counts as a failure.
module tb_sa_top;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 8, C = 8, D = 32;
  localparam int IAW = $clog2(D);

  logic clk = 0, rst_n = 0;
  logic wb_we, ib_we, ob_re, start, busy, done, col_valid;
  logic [$clog2(R)-1:0] wb_addr;
  logic [IAW-1:0] ib_addr, ob_addr;
  logic [IAW:0]   num_vec;
  bf16_t [C-1:0]  wb_wdata;
  bf16_t [R-1:0]  ib_wdata;
  fp32_t [C-1:0]  ob_rdata, col_result;
  int checks = 0, failures = 0;

  sa_top #(.ROWS(R), .COLS(C), .IDEPTH(D)) dut (.*);

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

  // ---------------- mechanism counters ----------------
  int m_zero [R][C], m_ge [R][C], m_lge [R][C], m_llt [R][C];
  int m_left [R][C], m_right [R][C], m_prsh [R][C], m_cancel [R][C];
  for (genvar r = 0; r < R; r++) begin : g_pr
    for (genvar c = 0; c < C; c++) begin : g_pc
      always @(posedge clk) if (busy) begin
        if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.in_zero) m_zero[r][c]++;
        else if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.s1.m_ge) m_ge[r][c]++;
        else if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.prod_big) m_lge[r][c]++;
        else m_llt[r][c]++;
        if (!dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.in_zero) begin
          if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.inc_left &&
              dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.inc_sh != 0) m_left[r][c]++;
          if (!dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.inc_left) m_right[r][c]++;
        end
        if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_fix.prod_rsh != 0) m_prsh[r][c]++;
        if (dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_add.mag == 0 &&
            dut.u_array.g_row[r].g_col[c].u_pe.u_s2.u_add.op_p != 0) m_cancel[r][c]++;
      end
    end
  end
  int m_round_up [C];
  for (genvar c = 0; c < C; c++) begin : g_rc
    always @(posedge clk) if (busy && dut.u_array.g_tail[c].u_round.up &&
                              dut.u_array.g_tail[c].u_round.ps_in.mag != 0) m_round_up[c]++;
  end
  int m_preload = 0, m_inf = 0;
  always @(posedge clk) if (rst_n && dut.u_ctrl.w_load) m_preload++;

  // ---------------- data ----------------
  bf16_t W [R][C];
  bf16_t A [D][R];

  task automatic run(input int nv, input int kind);
    int t0, t1;
    real exact, mag, got;
    // host writes
    for (int k = 0; k < R; k++) begin
      @(negedge clk); wb_we = 1; wb_addr = ($clog2(R))'(k);
      for (int j = 0; j < C; j++) wb_wdata[j] = W[k][j];
    end
    @(negedge clk); wb_we = 0;
    for (int n = 0; n < nv; n++) begin
      @(negedge clk); ib_we = 1; ib_addr = IAW'(n);
      for (int k = 0; k < R; k++) ib_wdata[k] = A[n][k];
    end
    @(negedge clk); ib_we = 0;
    start = 1; num_vec = (IAW+1)'(nv);
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    check(t1 - t0 == R + nv + (R + C + 2) + 2, $sformatf("start-to-done cycles %0d", t1 - t0));
    // read back
    for (int n = 0; n < nv; n++) begin
      @(negedge clk); ob_re = 1; ob_addr = IAW'(n);
      @(negedge clk); ob_re = 0;
      for (int j = 0; j < C; j++) begin
        exact = 0.0; mag = 0.0;
        for (int k = 0; k < R; k++) begin
          exact += bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]);
          mag   += fabs(bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]));
        end
        if (ob_rdata[j][30:23] == 8'hFF) begin
          m_inf++;
          check(fabs(exact) >= pow2(128) * (1.0 - pow2(-24)), "overflow to infinity only when too large");
          check(ob_rdata[j][31] == (exact < 0.0), "infinity sign");
        end else begin
          got = fp32_to_real(ob_rdata[j]);
          if (kind == 1)
            check(got == exact, $sformatf("exact run v%0d c%0d got=%g exp=%g", n, j, got, exact));
          else
            check(fabs(got - exact) <= mag * pow2(-20) + pow2(-120),
                  $sformatf("run%0d v%0d c%0d got=%g exp=%g", kind, n, j, got, exact));
        end
      end
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int sum;
    wb_we = 0; ib_we = 0; ob_re = 0; start = 0; num_vec = 0;
    wb_addr = 0; ib_addr = 0; ob_addr = 0; wb_wdata = '0; ib_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run 0: random, wide exponent range
    for (int k = 0; k < R; k++) for (int j = 0; j < C; j++) W[k][j] = rand_bf16(-25, 25);
    for (int n = 0; n < D; n++) for (int k = 0; k < R; k++) A[n][k] = rand_bf16(-25, 25);
    run(D, 0);
    // run 1: small integers, exact
    for (int k = 0; k < R; k++) for (int j = 0; j < C; j++) W[k][j] = small_int_bf16($signed($urandom_range(14)) - 7);
    for (int n = 0; n < 20; n++) for (int k = 0; k < R; k++) A[n][k] = small_int_bf16($signed($urandom_range(14)) - 7);
    run(20, 1);
    // run 2: exact cancellation (pairs a, -a against equal weights) and overflow
    for (int k = 0; k < R; k++) for (int j = 0; j < C; j++) W[k][j] = (j < C/2) ? W[k & ~1][j] : rand_bf16(100, 127);
    for (int k = 0; k < R; k += 2) for (int j = 0; j < C/2; j++) W[k+1][j] = W[k][j];
    for (int n = 0; n < 12; n++) for (int k = 0; k < R; k += 2) begin
      A[n][k]   = rand_bf16(-10, 10);
      A[n][k+1] = A[n][k] ^ 16'h8000;
      if (n % 3 == 0) begin A[n][k] = rand_bf16(100, 127); A[n][k+1] = A[n][k]; A[n][k][15] = 0; A[n][k+1][15] = 0; end
    end
    run(12, 2);

    begin
      int tz, tg, tl, tt, tlf, trt, tps, tca, tru;
      tz = 0; tg = 0; tl = 0; tt = 0; tlf = 0; trt = 0; tps = 0; tca = 0; tru = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        tz += m_zero[r][c]; tg += m_ge[r][c]; tl += m_lge[r][c]; tt += m_llt[r][c];
        tlf += m_left[r][c]; trt += m_right[r][c]; tps += m_prsh[r][c]; tca += m_cancel[r][c];
      end
      for (int c = 0; c < C; c++) tru += m_round_up[c];
      $display("mechanisms: zero-bypass=%0d spec-ge=%0d fix L>=d'=%0d fix L<d'=%0d", tz, tg, tl, tt);
      $display("            incoming-left=%0d incoming-right=%0d product-align=%0d cancel=%0d", tlf, trt, tps, tca);
      $display("            round-up=%0d overflow-inf=%0d preload-cycles=%0d", tru, m_inf, m_preload);
      check(tz > 0, "zero bypass seen");
      check(tg > 0, "speculative e_M >= e-hat case seen");
      check(tl > 0, "fix case L >= d' seen");
      check(tt > 0, "fix case L < d' seen");
      check(tlf > 0, "normalizing left shift seen");
      check(trt > 0, "aligning right shift seen");
      check(tps > 0, "product alignment seen");
      check(tca > 0, "exact cancellation seen");
      check(tru > 0, "round up seen");
      check(m_inf > 0, "overflow seen");
      check(m_preload == 3 * R, "preload cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
