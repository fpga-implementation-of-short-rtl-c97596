// cordic_dct8: multiplierless, short-critical-path approximation of the
// eight-point DCT, built from CORDIC microrotations (top level).
//
// The structure is the Loeffler DCT flow graph with its three plane rotations
// replaced by CORDIC cascades of adders and wired shifts:
//   stage 1        dct_input_stage: a = butterflies of x
//   stages 2-4     dct_even_part:   X0, X4 and the alpha rotation (X2, X6)
//   stages 2-4     beta rotation of (a7, a4), gamma rotation of (a6, a5)
//   stages 5-6     dct_odd_output:  X1, X5, X3, X7 with one NOT row
// The longest path is six adders and one NOT gate. No output is scaled: every
// X[k] equals s_k times the DCT coefficient, approximately, with
// s = {1, K, Ka, sqrt2*K, sqrt2, sqrt2*K, -Ka, K} (natural order,
// K ~= 1.1559, Ka ~= 1.1202), to be absorbed into a quantization table. X5 is
// biased by +1 LSB. The circuit has 36 adders, 16 shifts and one inversion.
//
// The flow graph, its angle approximations, the 8-bit input and 12-bit output
// widths and the purely combinational form are those of the published design.
// Signed input, one word width throughout, and truncating shifts are this
// implementation's choices.
//
// Interface: x[0..7] signed IN_W-bit samples in, X[0..7] signed W-bit results
// out in natural order. Combinational: no clock, no reset, no latency.
module cordic_dct8 #(
  parameter int IN_W = dct_pkg::IN_W,
  parameter int W    = dct_pkg::W
) (
  input  logic signed [IN_W-1:0] x [8],
  output logic signed [W-1:0]    X [8]
);

  logic signed [W-1:0] a [8];
  logic signed [W-1:0] bu, bl, gu, gl;

  dct_input_stage #(.IN_W(IN_W), .W(W)) u_stage1 (.x(x), .a(a));

  dct_even_part #(.W(W)) u_even (
    .a(a[0:3]), .x0(X[0]), .x4(X[4]), .x2(X[2]), .x6(X[6])
  );

  // Odd half: the beta rotation takes (a7, a4), the gamma rotation (a6, a5).
  cordic_rotator #(
    .W(W), .N(dct_pkg::BG_N),
    .SHIFTS(dct_pkg::BETA_SHIFTS), .SIGMAS(dct_pkg::BETA_SIGMAS)
  ) u_beta (
    .u_i(a[7]), .l_i(a[4]), .u_o(bu), .l_o(bl)
  );

  cordic_rotator #(
    .W(W), .N(dct_pkg::BG_N),
    .SHIFTS(dct_pkg::GAMMA_SHIFTS), .SIGMAS(dct_pkg::GAMMA_SIGMAS)
  ) u_gamma (
    .u_i(a[6]), .l_i(a[5]), .u_o(gu), .l_o(gl)
  );

  dct_odd_output #(.W(W)) u_odd (
    .bu(bu), .bl(bl), .gu(gu), .gl(gl),
    .x1(X[1]), .x5(X[5]), .x3(X[3]), .x7(X[7])
  );

endmodule
