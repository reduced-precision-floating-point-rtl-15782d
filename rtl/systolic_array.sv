// systolic_array: ROWS x COLS weight-stationary array of skewed_pe, with
// the extra addition stage and the FP32 rounding stage at the South end of
// every column.
//
// Computes O = A x W where W (ROWS x COLS, Bfloat16) is preloaded and the
// rows of A (Bfloat16 vectors of length ROWS) enter from the West. Element
// k of an A vector must enter row k exactly k cycles after element 0
// (the usual systolic stagger); activations then move one PE East per
// cycle. Column j's partial sum moves one row South per cycle, so
// result j of a vector whose element 0 was on a_in[0] in cycle t is on
// result[j] in cycle t + ROWS + 2 + j: ROWS cycles through the PEs (each
// row's first stage overlapping the previous row's second stage), one
// extra addition stage and one rounding stage. A new vector may enter
// every cycle.
//
// Weight preload: with w_load high, w_in[j] enters the top PE of column j
// and every weight register moves one row down; after ROWS cycles the row
// presented first sits at the bottom. Computation during preload gives
// meaningless results. The top PEs see a zero partial sum from the North.
module systolic_array
  import sa_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  bf16_t [ROWS-1:0]      a_in,     // staggered activations, West edge
  input  logic                  w_load,
  input  bf16_t [COLS-1:0]      w_in,     // weights, North edge
  output fp32_t [COLS-1:0]      result    // staggered FP32 results, South edge
);
  // inter-PE nets: index [row][col]; row index r is the input of row r
  bf16_t a_h  [ROWS][COLS+1];
  bf16_t w_v  [ROWS+1][COLS];
  s1_t   s1_v [ROWS+1][COLS];
  psum_t ps_v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_in[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      skewed_pe u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .a_in   (a_h[r][c]),
        .a_out  (a_h[r][c+1]),
        .w_load (w_load),
        .w_in   (w_v[r][c]),
        .w_out  (w_v[r+1][c]),
        .s1_in  (s1_v[r][c]),
        .ps_in  (ps_v[r][c]),
        .s1_out (s1_v[r+1][c]),
        .ps_out (ps_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_tail
    exp_t  e_unused;
    psum_t ps_last;

    assign w_v[0][c]  = w_in[c];
    assign s1_v[0][c] = S1_ZERO;
    assign ps_v[0][c] = PSUM_ZERO;

    // extra addition stage: second stage of the last row
    pe_add_stage u_last_add (
      .clk    (clk),
      .rst_n  (rst_n),
      .s1     (s1_v[ROWS][c]),
      .ps_in  (ps_v[ROWS][c]),
      .e_hat  (e_unused),
      .ps_out (ps_last)
    );

    round_stage u_round (
      .clk    (clk),
      .rst_n  (rst_n),
      .ps_in  (ps_last),
      .result (result[c])
    );
  end
endmodule
