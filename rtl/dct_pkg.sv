// dct_pkg: word widths, types and microrotation constants shared by the
// CORDIC-based 8-point DCT approximation.
//
// The transform takes eight 8-bit samples and returns eight 12-bit results;
// these two widths are the ones the design was published with. Every internal
// node is carried at the output width: the largest magnitude any node reaches
// for signed 8-bit input is 1053, so 12 bits never overflow. Treating the input
// as signed (level-shifted pixels) is a choice of this implementation.
//
// The three plane rotations of the Loeffler flow graph are approximated by
// short CORDIC cascades ("variant C"):
//   alpha = -pi/8  : i = {1,4},   sigma = {-1,+1}
//   beta  = -pi/16 : i = {1,2,4}, sigma = {-1,+1,+1}
//   gamma = -3pi/16: i = {1,2,4}, sigma = {-1,-1,+1}
// beta and gamma share the same set of |sigma| and shifts, so both have the
// same scale factor K = prod sqrt(1 + 2^-2i) ~= 1.1559, which, like the alpha
// factor (~1.1202), is left to the quantizer that follows the transform.
package dct_pkg;

  parameter int IN_W = 8;   // input sample width
  parameter int W    = 12;  // internal and output width

  typedef logic signed [IN_W-1:0] sample_t;
  typedef logic signed [W-1:0]    word_t;

  // Microrotation sets of the three rotations.
  parameter int ALPHA_N = 2;
  parameter int ALPHA_SHIFTS [ALPHA_N] = '{1, 4};
  parameter int ALPHA_SIGMAS [ALPHA_N] = '{-1, 1};

  parameter int BG_N = 3;
  parameter int BETA_SHIFTS  [BG_N] = '{1, 2, 4};
  parameter int BETA_SIGMAS  [BG_N] = '{-1, 1, 1};
  parameter int GAMMA_SHIFTS [BG_N] = '{1, 2, 4};
  parameter int GAMMA_SIGMAS [BG_N] = '{-1, -1, 1};

endpackage
