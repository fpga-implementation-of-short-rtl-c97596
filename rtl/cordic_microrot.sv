// cordic_microrot: one CORDIC microrotation of a pair of signal-flow lines.
//
// With u the upper line and l the lower line, it computes
//     u_o = u_i - SIGMA * (l_i >>> SHIFT)
//     l_o = l_i + SIGMA * (u_i >>> SHIFT)
// i.e. the elementary rotation [1 -s*2^-i; s*2^-i 1] of the CORDIC recurrence,
// built from two adders and two wired shifts. Both results are taken from the
// old pair, so the two adders work in parallel and the block adds one adder
// delay to the path.
//
// Mapping x to the upper and y to the lower line follows the minus marks of the
// published flow graph. The shift is an arithmetic right shift, so the dropped
// bits truncate toward minus infinity; that rounding, the absence of guard bits
// and the rejection of SIGMA = 0 are choices of this implementation.
//
// Interface: all ports W-bit two's complement. Purely combinational.
module cordic_microrot #(
  parameter int W     = dct_pkg::W,
  parameter int SHIFT = 1,
  parameter int SIGMA = -1
) (
  input  logic signed [W-1:0] u_i,
  input  logic signed [W-1:0] l_i,
  output logic signed [W-1:0] u_o,
  output logic signed [W-1:0] l_o
);

  if (SIGMA != 1 && SIGMA != -1) begin : g_bad_sigma
    $error("cordic_microrot: SIGMA must be +1 or -1");
  end
  if (SHIFT < 0 || SHIFT >= W) begin : g_bad_shift
    $error("cordic_microrot: SHIFT out of range");
  end

  logic signed [W-1:0] u_sh, l_sh;

  always_comb begin
    u_sh = u_i >>> SHIFT;
    l_sh = l_i >>> SHIFT;
    if (SIGMA > 0) begin
      u_o = u_i - l_sh;
      l_o = l_i + u_sh;
    end else begin
      u_o = u_i + l_sh;
      l_o = l_i - u_sh;
    end
  end

endmodule
