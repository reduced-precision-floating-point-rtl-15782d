// tb_add_lza: checks the sign-magnitude adder and leading-zero count
// against signed 64-bit integer addition.
module tb_add_lza;
  import sa_pkg::*;

  logic [ACC_W-1:0] op_p, op_c;
  logic             sign_p, sign_c, sign;
  logic [SUM_W-1:0] mag;
  logic [LZ_W-1:0]  lz;
  int checks = 0, failures = 0;

  add_lza dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s p=%s%h c=%s%h -> %s%h lz=%0d", what, sign_p ? "-" : "+", op_p,
               sign_c ? "-" : "+", op_c, sign ? "-" : "+", mag, lz);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, a;
    int exp_lz;
    for (int n = 0; n < 4000; n++) begin
      op_p   = ACC_W'($urandom) >> $urandom_range(ACC_W);
      op_c   = (n % 13 == 0) ? op_p : ACC_W'($urandom) >> $urandom_range(ACC_W);
      sign_p = 1'($urandom_range(1));
      sign_c = 1'($urandom_range(1));
      #1;
      v = (sign_p ? -longint'(op_p) : longint'(op_p)) + (sign_c ? -longint'(op_c) : longint'(op_c));
      a = (v < 0) ? -v : v;
      exp_lz = int'(SUM_W);
      for (int k = 0; k < int'(SUM_W); k++) if (a[k]) exp_lz = int'(SUM_W) - 1 - k;
      check(longint'(mag) == a, "magnitude");
      check(sign == (v < 0), "sign");
      check(int'(lz) == exp_lz, "leading zeros");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
