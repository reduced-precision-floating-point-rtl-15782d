// tb_buffer_mem: random writes and reads against an array model; checks
// the one-cycle read latency, that rdata holds when re is low and that a
// read of an address written in the same cycle returns the old data.
module tb_buffer_mem;
  localparam int D = 16, WD = 40;
  logic clk = 0;
  logic we, re;
  logic [3:0] waddr, raddr;
  logic [WD-1:0] wdata, rdata, model [D], expect_q;
  int checks = 0, failures = 0;

  buffer_mem #(.DEPTH(D), .WIDTH(WD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit pending;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = {8'($urandom), 32'($urandom)}; model[a] = wdata;
    end
    pending = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (pending) begin
        checks++;
        if (rdata != expect_q) begin failures++; $display("FAIL read %h != %h", rdata, expect_q); end
      end else if (n > 0) begin
        checks++;
        if (rdata != expect_q) begin failures++; $display("FAIL hold"); end
      end
      we = 1'($urandom_range(1)); re = 1'($urandom_range(1));
      waddr = 4'($urandom); raddr = (n % 5 == 0) ? waddr : 4'($urandom);
      wdata = {8'($urandom), 32'($urandom)};
      if (re) expect_q = model[raddr];
      pending = re;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
