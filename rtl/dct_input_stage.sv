// dct_input_stage: first stage of the 8-point DCT flow graph.
//
// Four butterflies fold the input around its centre:
//     a[k]   = x[k] + x[7-k]     (k = 0..3, feed the even half)
//     a[7-k] = x[k] - x[7-k]     (feed the odd half)
// Eight adders in parallel, one adder delay. The inputs are sign-extended from
// IN_W to the internal width W first, which keeps every later node exact for
// signed IN_W-bit samples. The butterfly structure is the published one; the
// sign convention of the differences (x[k] - x[7-k]) is read from the flow
// graph's minus marks.
//
// Interface: x[0..7] signed IN_W-bit samples, a[0..7] signed W-bit results.
// Purely combinational.
module dct_input_stage #(
  parameter int IN_W = dct_pkg::IN_W,
  parameter int W    = dct_pkg::W
) (
  input  logic signed [IN_W-1:0] x [8],
  output logic signed [W-1:0]    a [8]
);

  if (W <= IN_W) begin : g_bad_width
    $error("dct_input_stage: W must exceed IN_W");
  end

  logic signed [W-1:0] xe [8];

  always_comb begin
    for (int n = 0; n < 8; n++) xe[n] = W'(x[n]);   // sign extension
    for (int k = 0; k < 4; k++) begin
      a[k]   = xe[k] + xe[7-k];
      a[7-k] = xe[k] - xe[7-k];
    end
  end

endmodule
