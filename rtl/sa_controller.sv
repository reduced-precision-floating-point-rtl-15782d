// sa_controller: sequences one weight-stationary matrix multiplication
// on the array.
//
// On start it (1) preloads the weight tile: it reads the weight buffer
// rows ROWS-1 down to 0, one per cycle, and raises w_load one cycle later,
// when each row is on the buffer's read port, so that after ROWS shifts
// row k of W sits in array row k; (2) streams num_vec input vectors, one
// per cycle, from input buffer addresses 0..num_vec-1 into the West skew
// network; (3) waits for the results. Every input read launches a token
// down a LAT-cycle delay line that matches the read latency, the array's
// latency and the South de-skew, so the token marks the cycle in which
// the matching FP32 result vector is complete; the controller then
// writes it to output buffer address 0, 1, ... . done pulses for one cycle
// after the last write; busy is high from start to done.
//
// The paper describes the dataflow but no controller: the three phases
// and this handshake are this design's choice. start is ignored while
// busy; num_vec = 0 finishes after the weight preload.
module sa_controller
  import sa_pkg::*;
#(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned IDEPTH = 256,   // input and output buffer depth
  localparam int unsigned WAW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IAW   = $clog2(IDEPTH),
  localparam int unsigned LAT   = ROWS + COLS + 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [IAW:0]   num_vec,
  output logic           busy,
  output logic           done,
  // weight buffer read port and array preload control
  output logic           wbuf_re,
  output logic [WAW-1:0] wbuf_raddr,
  output logic           w_load,
  // input buffer read port
  output logic           ibuf_re,
  output logic [IAW-1:0] ibuf_raddr,
  // output buffer write port
  output logic           obuf_we,
  output logic [IAW-1:0] obuf_waddr
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_t;
  state_t        state;
  logic [WAW:0]  wcnt;
  logic [IAW:0]  icnt, ocnt, nvec_q;
  logic [LAT-1:0] vpipe;

  always_comb begin
    wbuf_re    = (state == S_LOAD);
    wbuf_raddr = WAW'(ROWS - 1) - wcnt[WAW-1:0];
    ibuf_re    = (state == S_STREAM) && (icnt < nvec_q);
    ibuf_raddr = icnt[IAW-1:0];
    obuf_we    = vpipe[LAT-1];
    obuf_waddr = ocnt[IAW-1:0];
    busy       = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state  <= S_IDLE;
      wcnt   <= '0;
      icnt   <= '0;
      ocnt   <= '0;
      nvec_q <= '0;
      vpipe  <= '0;
      w_load <= 1'b0;
      done   <= 1'b0;
    end else begin
      w_load <= wbuf_re;
      vpipe  <= {vpipe[LAT-2:0], ibuf_re};
      done   <= 1'b0;
      if (obuf_we) ocnt <= ocnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_LOAD;
          wcnt   <= '0;
          icnt   <= '0;
          ocnt   <= '0;
          nvec_q <= (num_vec > (IAW+1)'(IDEPTH)) ? (IAW+1)'(IDEPTH) : num_vec;
        end
        S_LOAD: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == (WAW+1)'(ROWS - 1)) state <= S_STREAM;
        end
        S_STREAM: begin
          if (icnt < nvec_q) icnt <= icnt + 1'b1;
          else               state <= S_DRAIN;
        end
        S_DRAIN: if (vpipe == '0) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end

  // a write can only be due while a multiplication is in flight
  assert property (@(posedge clk) disable iff (!rst_n) obuf_we |-> busy);
endmodule
