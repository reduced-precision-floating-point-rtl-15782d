// tb_skew_buffer: drives a new random vector every cycle into a forward
// and a reverse skew network and checks that lane k of the output equals
// lane k of the input k (forward) or LANES-1-k (reverse) cycles earlier.
module tb_skew_buffer;
  localparam int L = 5, W = 8, N = 200;
  logic clk = 0, rst_n = 0;
  logic [L-1:0][W-1:0] din, dout_f, dout_r;
  logic [L-1:0][W-1:0] hist [N];
  int checks = 0, failures = 0;

  skew_buffer #(.LANES(L), .W(W), .REVERSE(1'b0)) u_f (.clk, .rst_n, .din, .dout(dout_f));
  skew_buffer #(.LANES(L), .W(W), .REVERSE(1'b1)) u_r (.clk, .rst_n, .din, .dout(dout_r));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < N; t++) begin
      @(negedge clk);
      for (int k = 0; k < L; k++) din[k] = W'($urandom);
      hist[t] = din;
      #1;
      for (int k = 0; k < L; k++) begin
        if (t - k >= 0) begin
          checks++;
          if (dout_f[k] != hist[t-k][k]) begin failures++; $display("FAIL fwd t=%0d k=%0d", t, k); end
        end
        if (t - (L - 1 - k) >= 0) begin
          checks++;
          if (dout_r[k] != hist[t-(L-1-k)][k]) begin failures++; $display("FAIL rev t=%0d k=%0d", t, k); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
