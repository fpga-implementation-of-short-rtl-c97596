// cordic_rotator: approximate plane rotation R(phi) as a cascade of N CORDIC
// microrotations, without the 1/K scaling.
//
// Stage k applies the microrotation with shift SHIFTS[k] and direction
// SIGMAS[k]; the rotation angle is phi = sum SIGMAS[k]*atan(2^-SHIFTS[k]) and
// the outputs are K times the rotated pair, K = prod sqrt(1 + 2^-2*SHIFTS[k]).
// The defaults are the beta set (i = {1,2,4}, sigma = {-1,+1,+1}, phi ~= -0.156
// rad for -pi/16); the DCT instantiates the same module with the alpha and
// gamma sets. Leaving 1/K out, and applying the stages in the order listed (one
// per flow-graph stage), follows the published design.
//
// Interface: upper/lower input and output lines, W-bit two's complement.
// Purely combinational, N adder delays from input to output.
module cordic_rotator #(
  parameter int W          = dct_pkg::W,
  parameter int N          = dct_pkg::BG_N,
  parameter int SHIFTS [N] = dct_pkg::BETA_SHIFTS,
  parameter int SIGMAS [N] = dct_pkg::BETA_SIGMAS
) (
  input  logic signed [W-1:0] u_i,
  input  logic signed [W-1:0] l_i,
  output logic signed [W-1:0] u_o,
  output logic signed [W-1:0] l_o
);

  // Lines between the microrotations: index 0 is the input, N the output.
  logic signed [W-1:0] u [N+1];
  logic signed [W-1:0] l [N+1];

  assign u[0] = u_i;
  assign l[0] = l_i;

  for (genvar k = 0; k < N; k++) begin : g_stage
    cordic_microrot #(.W(W), .SHIFT(SHIFTS[k]), .SIGMA(SIGMAS[k])) u_mr (
      .u_i(u[k]), .l_i(l[k]), .u_o(u[k+1]), .l_o(l[k+1])
    );
  end

  assign u_o = u[N];
  assign l_o = l[N];

endmodule
