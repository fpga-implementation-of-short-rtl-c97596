// tb_cordic_microrot: checks cordic_microrot for the four (shift, sigma)
// pairs the DCT uses plus i = 2, sigma = -1, on corner values and random
// 12-bit words that cannot overflow, against the integer reference of
// tb_dct_ref_pkg. Combinational: outputs are sampled 1 ns after each input.
module tb_cordic_microrot;
  import tb_dct_ref_pkg::*;

  localparam int W = 12;
  localparam int NC = 5;
  localparam int SH [NC] = '{1, 2, 2, 4, 4};
  localparam int SG [NC] = '{-1, 1, -1, 1, -1};

  int checks = 0, failures = 0;
  logic signed [W-1:0] u, l;
  logic signed [W-1:0] uo [NC], lo [NC];

  for (genvar c = 0; c < NC; c++) begin : g_dut
    cordic_microrot #(.W(W), .SHIFT(SH[c]), .SIGMA(SG[c])) dut (
      .u_i(u), .l_i(l), .u_o(uo[c]), .l_o(lo[c]));
  end

  task automatic apply(int uv, int lv);
    int eu, el;
    u = W'(uv); l = W'(lv);
    #1;
    for (int c = 0; c < NC; c++) begin
      eu = uv; el = lv;
      micro(eu, el, SH[c], SG[c]);
      checks++;
      if (int'(uo[c]) != eu || int'(lo[c]) != el) begin
        failures++;
        if (failures < 10)
          $display("FAIL shift=%0d sigma=%0d u=%0d l=%0d: got %0d %0d want %0d %0d",
                   SH[c], SG[c], uv, lv, uo[c], lo[c], eu, el);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int corner [10] = '{0, 1, -1, 2, -2, 15, -15, -16, 1300, -1300};
    foreach (corner[i]) foreach (corner[j]) apply(corner[i], corner[j]);
    repeat (4000) apply(int'($urandom_range(2600)) - 1300, int'($urandom_range(2600)) - 1300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
