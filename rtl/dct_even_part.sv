// dct_even_part: even half of the CORDIC-based 8-point DCT (stages 2 to 4 of
// the flow graph, lines 0..3), producing X0, X4, X2 and X6.
//
//     b0 = a0 + a3    b3 = a0 - a3    (stage 2)
//     b1 = a1 + a2    b2 = a1 - a2
//     X0 = b0 + b1    X4 = b0 - b1    (stage 3)
//     (X2, X6) = CORDIC rotation by alpha of (b3, b2)  (stages 3 and 4)
// The alpha rotation (about -pi/8) uses microrotations i = {1,4} with
// sigma = {-1,+1}; its gain K_alpha ~= 1.1202 is not removed. X4 carries a
// gain of sqrt(2) relative to the orthonormal DCT row and X6 comes out with the
// opposite sign; both are meant to be folded into the quantizer's constants.
// All of this follows the published flow graph; the word width is this
// implementation's choice.
//
// Interface: a[0..3] from the input stage, W-bit signed; outputs W-bit signed.
// Purely combinational, three adder delays.
module dct_even_part #(
  parameter int W = dct_pkg::W
) (
  input  logic signed [W-1:0] a [4],
  output logic signed [W-1:0] x0,
  output logic signed [W-1:0] x4,
  output logic signed [W-1:0] x2,
  output logic signed [W-1:0] x6
);

  logic signed [W-1:0] b0, b1, b2, b3;

  always_comb begin
    b0 = a[0] + a[3];
    b3 = a[0] - a[3];
    b1 = a[1] + a[2];
    b2 = a[1] - a[2];
    x0 = b0 + b1;
    x4 = b0 - b1;
  end

  // Lines 2 and 3 cross ahead of the rotation: b3 enters on the upper input.
  cordic_rotator #(
    .W(W), .N(dct_pkg::ALPHA_N),
    .SHIFTS(dct_pkg::ALPHA_SHIFTS), .SIGMAS(dct_pkg::ALPHA_SIGMAS)
  ) u_alpha (
    .u_i(b3), .l_i(b2), .u_o(x2), .l_o(x6)
  );

endmodule
