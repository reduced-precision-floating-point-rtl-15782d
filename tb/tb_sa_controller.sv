// tb_sa_controller: runs the controller with a small array size and
// checks its schedule cycle by cycle: ROWS weight-buffer reads at
// addresses ROWS-1..0 on consecutive cycles, w_load exactly one cycle
// behind each read, num_vec input reads at addresses 0..num_vec-1 right
// after the preload, one output write LAT = ROWS+COLS+2 cycles after each
// input read at addresses 0, 1, ..., a one-cycle done pulse, busy from
// start to done, and start ignored while busy.
module tb_sa_controller;
  localparam int R = 5, C = 3, D = 16, LAT = R + C + 2;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, wbuf_re, w_load, ibuf_re, obuf_we;
  logic [4:0] num_vec;
  logic [2:0] wbuf_raddr;
  logic [3:0] ibuf_raddr, obuf_waddr;
  int checks = 0, failures = 0;

  sa_controller #(.ROWS(R), .COLS(C), .IDEPTH(D)) dut (.*);

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
    int t_start, nv, wr, rd, ww, ird, owr, t_done;
    int rd_cyc [32];
    bit prev_wre;
    start = 0; num_vec = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      nv = (run == 5) ? 0 : int'($urandom_range(D - 1)) + 1;
      @(negedge clk);
      start = 1; num_vec = 5'(nv);
      @(negedge clk);
      start = 0;
      t_start = cyc;
      ww = 0; ird = 0; owr = 0; prev_wre = 0; t_done = -1;
      while (t_done < 0) begin
        #1;
        check(busy, "busy until done");
        if (run == 2 && ww == 2) start = 1;   // must be ignored
        else start = 0;
        check(w_load == prev_wre, "w_load follows weight read by one cycle");
        prev_wre = wbuf_re;
        if (wbuf_re) begin
          check(int'(wbuf_raddr) == R - 1 - ww, "weight read address");
          check(cyc - t_start == ww, "weight reads back to back from start");
          ww++;
        end
        if (ibuf_re) begin
          check(ww == R, "inputs after preload");
          check(int'(ibuf_raddr) == ird, "input read address");
          check(cyc - t_start == R + ird, "input reads back to back");
          rd_cyc[ird] = cyc;
          ird++;
        end
        if (obuf_we) begin
          check(int'(obuf_waddr) == owr, "output write address");
          check(owr < ird && cyc - rd_cyc[owr] == LAT, "write LAT cycles after its read");
          owr++;
        end
        @(negedge clk);
        if (done) t_done = cyc;
        if (cyc - t_start > 200) break;
      end
      check(t_done >= 0, "done pulse");
      check(ww == R && ird == nv && owr == nv, $sformatf("counts w=%0d i=%0d o=%0d nv=%0d", ww, ird, owr, nv));
      #1;
      check(!busy, "idle after done");
      @(negedge clk);
      check(!done, "done lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
