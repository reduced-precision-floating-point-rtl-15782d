// tb_systolic_array: preloads a random Bfloat16 weight tile into a small
// array, streams staggered activation vectors one per cycle and checks
// every FP32 result in the exact cycle the skewed pipeline promises
// (ROWS + 2 + j cycles after element 0 of the vector entered, for column
// j). Half of the vectors use small integers, whose dot products are exact
// in FP32 and must match bit for bit; the others use random values over a
// wide exponent range and are checked against a real-valued reference
// within a relative bound of 2^-20 of the sum of |a*w|.
module tb_systolic_array;
  import sa_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 6, C = 4, NV = 40;

  logic clk = 0, rst_n = 0;
  bf16_t [R-1:0] a_in;
  logic          w_load;
  bf16_t [C-1:0] w_in;
  fp32_t [C-1:0] result;
  int checks = 0, failures = 0;

  bf16_t W [R][C];
  bf16_t A [NV][R];

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

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

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int t0, n, lag;
    real exact, mag, got;
    for (int k = 0; k < R; k++)
      for (int j = 0; j < C; j++)
        W[k][j] = (j == 0) ? small_int_bf16($signed($urandom_range(14)) - 7) : rand_bf16(-20, 20);
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < R; k++)
        A[v][k] = (v % 2 == 0) ? small_int_bf16($signed($urandom_range(14)) - 7) : rand_bf16(-20, 20);
    a_in = '0; w_load = 0; w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // preload: bottom row first
    for (int k = R - 1; k >= 0; k--) begin
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < C; j++) w_in[j] = W[k][j];
    end
    @(negedge clk);
    w_load = 0;
    t0 = cyc;              // element 0 of vector 0 is on a_in[0] in this cycle
    for (int s = 0; s < NV + R + C + 4; s++) begin
      for (int k = 0; k < R; k++) begin
        n = s - k;
        a_in[k] = (n >= 0 && n < NV) ? A[n][k] : '0;
      end
      #1;
      for (int j = 0; j < C; j++) begin
        n = s - R - 2 - j;
        if (n >= 0 && n < NV) begin
          exact = 0.0; mag = 0.0;
          for (int k = 0; k < R; k++) begin
            exact += bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]);
            mag   += fabs(bf16_to_real(A[n][k]) * bf16_to_real(W[k][j]));
          end
          got = fp32_to_real(result[j]);
          if (n % 2 == 0 && j == 0)
            check(got == exact, $sformatf("exact v%0d c%0d got=%g exp=%g", n, j, got, exact));
          else
            check(fabs(got - exact) <= mag * pow2(-20) + pow2(-120),
                  $sformatf("v%0d c%0d got=%g exp=%g", n, j, got, exact));
        end
      end
      @(negedge clk);
    end
    lag = cyc - t0;
    check(lag == NV + R + C + 4, "cycle count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
