// skew_buffer: triangular delay network that staggers a vector in time.
//
// With REVERSE = 0, lane k is delayed by k cycles: a vector written in one
// cycle leaves lane 0 at once, lane 1 one cycle later and so on, which is
// the diagonal wavefront the West edge of the array needs. With
// REVERSE = 1, lane k is delayed by LANES-1-k cycles, which realigns the
// staggered results of the South edge into one vector, LANES-1 cycles
// after the first lane arrived. Lanes of delay 0 are plain wires.
module skew_buffer #(
  parameter int unsigned LANES   = 128,
  parameter int unsigned W       = 16,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [LANES-1:0][W-1:0] din,
  output logic [LANES-1:0][W-1:0] dout
);
  for (genvar k = 0; k < LANES; k++) begin : g_lane
    localparam int unsigned DLY = REVERSE ? LANES - 1 - k : k;
    if (DLY == 0) begin : g_wire
      assign dout[k] = din[k];
    end else begin : g_dly
      logic [W-1:0] sr [DLY];
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) begin
          for (int s = 0; s < DLY; s++) sr[s] <= '0;
        end else begin
          sr[0] <= din[k];
          for (int s = 1; s < DLY; s++) sr[s] <= sr[s-1];
        end
      assign dout[k] = sr[DLY-1];
    end
  end
endmodule
