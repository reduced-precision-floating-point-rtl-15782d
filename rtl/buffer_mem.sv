// buffer_mem: simple dual-port synchronous memory used for the weight,
// input and output buffers that surround the array.
//
// One write port and one read port, both on clk. A read issued with re
// high returns mem[raddr] on rdata in the next cycle (rdata holds its value
// otherwise). A write and a read of the same address in one cycle return
// the old contents. The paper names these local memory banks but gives
// neither their organization nor their size; one word per array row or
// column vector and the depths set by the instantiating module are this
// design's choice. Contents are not reset.
module buffer_mem #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 2048,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
