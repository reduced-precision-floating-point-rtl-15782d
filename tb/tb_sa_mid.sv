// tb_sa_mid: one complete matrix multiplication on a 32x32 tile with
// 64-entry buffers, the largest size that builds quickly: a random 32x32
// Bfloat16 weight tile, NV = 48 random activation rows, start, done,
// read-back of every FP32 result against a real-valued reference
// (relative bound 2^-20 of the sum of |a*w|), and the start-to-done cycle
// count ROWS + NV + (ROWS+COLS+2) + 2.
module tb_sa_mid;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 32, C = 32, D = 64, NV = 48;
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

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bf16_t W [R][C];
  bf16_t A [NV][R];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int t0, t1;
    real exact, mag, got;
    wb_we = 0; ib_we = 0; ob_re = 0; start = 0; num_vec = 0;
    wb_addr = 0; ib_addr = 0; ob_addr = 0; wb_wdata = '0; ib_wdata = '0;
    for (int k = 0; k < R; k++) for (int j = 0; j < C; j++) W[k][j] = rand_bf16(-8, 8);
    for (int n = 0; n < NV; n++) for (int k = 0; k < R; k++) A[n][k] = rand_bf16(-8, 8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < R; k++) begin
      @(negedge clk); wb_we = 1; wb_addr = ($clog2(R))'(k);
      for (int j = 0; j < C; j++) wb_wdata[j] = W[k][j];
    end
    @(negedge clk); wb_we = 0;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk); ib_we = 1; ib_addr = IAW'(n);
      for (int k = 0; k < R; k++) ib_wdata[k] = A[n][k];
    end
    @(negedge clk); ib_we = 0;
    start = 1; num_vec = (IAW+1)'(NV);
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 != R + NV + (R + C + 2) + 2) begin
      failures++; $display("FAIL start-to-done cycles %0d", t1 - t0);
    end
    for (int n = 0; n < NV; n++) begin
      @(negedge clk); ob_re = 1; ob_addr = IAW'(n);
      @(negedge clk); ob_re = 0;
      for (int j = 0; j < C; j++) begin
        exact = 0.0; mag = 0.0;
        for (int k = 0; k < R; k++) begin
          exact += bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]);
          mag   += fabs(bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]));
        end
        got = fp32_to_real(ob_rdata[j]);
        checks++;
        if (fabs(got - exact) > mag * pow2(-20) + pow2(-120)) begin
          failures++;
          $display("FAIL v%0d c%0d got=%g exp=%g", n, j, got, exact);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
