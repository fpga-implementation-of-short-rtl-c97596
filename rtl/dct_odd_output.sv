// dct_odd_output: last two stages of the odd half, with the negation of the
// original flow graph merged away (stages 5 and 6).
//
// The inputs are the outputs of the beta rotation (bu, bl) and the gamma
// rotation (gu, gl). The original graph negated bl with a whole adder. Here a
// row of NOT gates gives ~bl = -bl - 1 and the missing +1 is fed into the carry
// input of later adders:
//     X1 = bu + gu                 m2 = bu - gu            (stage 5)
//     X7 = gl + ~bl + 1 = gl - bl  (carry-in 1, exact)
//     n6 = ~bl - gl = -(bl + gl) - 1
//     X3 = m2 + n6 + 1 = m2 - (bl + gl)       (stage 6, carry-in 1, exact)
//     X5 = m2 - n6     = m2 + (bl + gl) + 1   (one LSB high, left so)
// X5 keeps the +1 on purpose: compensating it would need an extra adder on the
// critical path, which the design trades for one LSB of accuracy on that output.
// The six adders and one inversion, and which two adders take the carry, follow
// the published flow graph; the crossing of lines is read from it.
//
// Interface: four W-bit signed inputs, four W-bit signed outputs.
// Purely combinational: NOT gate plus two adder delays.
module dct_odd_output #(
  parameter int W = dct_pkg::W
) (
  input  logic signed [W-1:0] bu,
  input  logic signed [W-1:0] bl,
  input  logic signed [W-1:0] gu,
  input  logic signed [W-1:0] gl,
  output logic signed [W-1:0] x1,
  output logic signed [W-1:0] x5,
  output logic signed [W-1:0] x3,
  output logic signed [W-1:0] x7
);

  logic signed [W-1:0] bl_n;   // bitwise inversion of bl, i.e. -bl - 1
  logic signed [W-1:0] m2, n6;

  always_comb begin
    bl_n = ~bl;
    // stage 5
    x1 = bu + gu;
    m2 = bu - gu;
    n6 = bl_n - gl;
    x7 = gl + bl_n + W'(1);       // carry-in 1 completes the negation
    // stage 6
    x5 = m2 - n6;                 // uncompensated: one LSB high
    x3 = m2 + n6 + W'(1);         // carry-in 1 completes the negation
  end

endmodule
