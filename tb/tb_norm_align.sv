// tb_norm_align: checks the merged normalize/align shifters against
// 64-bit reference shifts: the product is placed at the top of the
// ACC_W-bit operand and shifted right; the incoming SUM_W-bit sum is
// shifted left or right and the low ACC_W bits kept.
module tb_norm_align;
  import sa_pkg::*;

  logic [PROD_W-1:0] prod;
  logic [SH_W-1:0]   prod_rsh, inc_sh;
  logic [SUM_W-1:0]  inc_mag;
  logic              inc_left;
  logic [ACC_W-1:0]  op_p, op_c;
  int checks = 0, failures = 0;

  norm_align dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s prod=%h rsh=%0d inc=%h left=%b sh=%0d op_p=%h op_c=%h",
               what, prod, prod_rsh, inc_mag, inc_left, inc_sh, op_p, op_c);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned p64, c64, mask;
    mask = (64'd1 << ACC_W) - 1;
    for (int n = 0; n < 4000; n++) begin
      prod     = PROD_W'($urandom);
      inc_mag  = SUM_W'($urandom);
      prod_rsh = SH_W'($urandom_range(SUM_W));
      inc_sh   = SH_W'($urandom_range(SUM_W));
      inc_left = 1'($urandom_range(1));
      #1;
      p64 = (64'(prod) << (ACC_W - PROD_W)) >> prod_rsh;
      c64 = inc_left ? (64'(inc_mag) << inc_sh) & mask : (64'(inc_mag) >> inc_sh) & mask;
      check(64'(op_p) == p64, "product align");
      check(64'(op_c) == c64, inc_left ? "incoming left" : "incoming right");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
