// add_lza: the "Add" and "LZA" blocks of a PE row's second stage.
// Combinational.
//
// Adds two aligned sign-magnitude operands. For unlike signs the smaller
// magnitude is subtracted from the larger and the result takes the sign of
// the larger, so the result is again sign-magnitude with one carry bit
// (SUM_W = ACC_W + 1 bits). A zero result is positive. Alongside the sum
// it produces L, the number of leading zeros of the result (SUM_W for a
// zero result), which the next row uses to normalize this sum.
//
// The paper uses a leading-zero anticipator working on the operands in
// parallel with the adder; this design counts the leading zeros of the
// adder output instead, which yields the exact value the anticipator
// approximates.
module add_lza
  import sa_pkg::*;
(
  input  logic [ACC_W-1:0] op_p,
  input  logic             sign_p,
  input  logic [ACC_W-1:0] op_c,
  input  logic             sign_c,
  output logic [SUM_W-1:0] mag,
  output logic             sign,
  output logic [LZ_W-1:0]  lz
);
  always_comb begin
    if (sign_p == sign_c) begin
      mag  = SUM_W'(op_p) + SUM_W'(op_c);
      sign = sign_p;
    end else if (op_p >= op_c) begin
      mag  = SUM_W'(op_p - op_c);
      sign = sign_p;
    end else begin
      mag  = SUM_W'(op_c - op_p);
      sign = sign_c;
    end
    if (mag == '0) sign = 1'b0;

    lz = LZ_W'(SUM_W);
    for (int k = 0; k < SUM_W; k++)
      if (mag[k]) lz = LZ_W'(SUM_W - 1 - k);
  end
endmodule
