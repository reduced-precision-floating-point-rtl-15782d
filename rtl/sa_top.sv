// sa_top: the complete accelerator tile: weight, input and output
// buffers, the West skew and South de-skew networks, the controller and
// the ROWS x COLS skewed-pipeline systolic array.
//
// A host fills the weight buffer (word k = row k of W, COLS Bfloat16
// values) and the input buffer (word n = row n of A, ROWS Bfloat16
// values), pulses start with num_vec = number of A rows, waits for done
// and reads row n of O = A x W (COLS FP32 values) from output buffer word
// n, one cycle after raising ob_re. From the cycle in which start is high
// to the cycle in which done is high takes ROWS (preload) + num_vec
// (streaming) + ROWS + COLS + 2 (array fill and drain, including buffer
// read and de-skew) + 2 (control) cycles. The de-skewed result vector and its strobe are
// also brought out as col_result / col_valid: a figure of the original
// publication draws an adder with a feedback register under each column
// without describing its use; these ports are where such accumulators
// would attach. Host buffer ports must not be used while busy.
module sa_top
  import sa_pkg::*;
#(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned IDEPTH = 256,
  localparam int unsigned WAW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IAW   = $clog2(IDEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight buffer host write port
  input  logic                 wb_we,
  input  logic [WAW-1:0]       wb_addr,
  input  bf16_t [COLS-1:0]     wb_wdata,
  // input buffer host write port
  input  logic                 ib_we,
  input  logic [IAW-1:0]       ib_addr,
  input  bf16_t [ROWS-1:0]     ib_wdata,
  // output buffer host read port
  input  logic                 ob_re,
  input  logic [IAW-1:0]       ob_addr,
  output fp32_t [COLS-1:0]     ob_rdata,
  // control
  input  logic                 start,
  input  logic [IAW:0]         num_vec,
  output logic                 busy,
  output logic                 done,
  // de-skewed column results (to optional column accumulators)
  output fp32_t [COLS-1:0]     col_result,
  output logic                 col_valid
);
  logic                 wbuf_re, w_load, ibuf_re, obuf_we;
  logic [WAW-1:0]       wbuf_raddr;
  logic [IAW-1:0]       ibuf_raddr, obuf_waddr;
  bf16_t [COLS-1:0]     w_row;
  bf16_t [ROWS-1:0]     a_row, a_skew;
  fp32_t [COLS-1:0]     res_skew;

  sa_controller #(.ROWS(ROWS), .COLS(COLS), .IDEPTH(IDEPTH)) u_ctrl (
    .clk, .rst_n, .start, .num_vec, .busy, .done,
    .wbuf_re, .wbuf_raddr, .w_load,
    .ibuf_re, .ibuf_raddr,
    .obuf_we, .obuf_waddr
  );

  buffer_mem #(.DEPTH(ROWS), .WIDTH(COLS*IN_W)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_addr), .wdata(wb_wdata),
    .re(wbuf_re), .raddr(wbuf_raddr), .rdata(w_row)
  );

  buffer_mem #(.DEPTH(IDEPTH), .WIDTH(ROWS*IN_W)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_addr), .wdata(ib_wdata),
    .re(ibuf_re), .raddr(ibuf_raddr), .rdata(a_row)
  );

  skew_buffer #(.LANES(ROWS), .W(IN_W), .REVERSE(1'b0)) u_west_skew (
    .clk, .rst_n, .din(a_row), .dout(a_skew)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .a_in(a_skew), .w_load, .w_in(w_row), .result(res_skew)
  );

  skew_buffer #(.LANES(COLS), .W(OUT_W), .REVERSE(1'b1)) u_south_deskew (
    .clk, .rst_n, .din(res_skew), .dout(col_result)
  );

  assign col_valid = obuf_we;

  buffer_mem #(.DEPTH(IDEPTH), .WIDTH(COLS*OUT_W)) u_obuf (
    .clk, .we(obuf_we), .waddr(obuf_waddr), .wdata(col_result),
    .re(ob_re), .raddr(ob_addr), .rdata(ob_rdata)
  );
endmodule
