// tb_cordic_rotator: checks cordic_rotator with the three microrotation sets
// of the DCT (beta = the defaults, gamma, alpha). Bit-exact comparison with the
// integer reference on corners and random inputs in the range the DCT feeds
// in (|v| <= 510), then a geometric check on a large vector (1500, 0): the
// output angle must be sum(sigma*atan(2^-i)) and the length K*1500, each
// within the truncation error. Combinational, sampled 1 ns after each input.
module tb_cordic_rotator;
  import tb_dct_ref_pkg::*;

  localparam int W = 12;
  int checks = 0, failures = 0;
  logic signed [W-1:0] u, l;
  logic signed [W-1:0] uo [3], lo [3];

  cordic_rotator dut_beta (.u_i(u), .l_i(l), .u_o(uo[0]), .l_o(lo[0]));
  localparam int G_SH [3] = '{1, 2, 4};
  localparam int G_SG [3] = '{-1, -1, 1};
  localparam int A_SH [2] = '{1, 4};
  localparam int A_SG [2] = '{-1, 1};

  cordic_rotator #(.W(W), .N(3), .SHIFTS(G_SH), .SIGMAS(G_SG)) dut_gamma (
    .u_i(u), .l_i(l), .u_o(uo[1]), .l_o(lo[1]));
  cordic_rotator #(.W(W), .N(2), .SHIFTS(A_SH), .SIGMAS(A_SG)) dut_alpha (
    .u_i(u), .l_i(l), .u_o(uo[2]), .l_o(lo[2]));

  function automatic int nmicro(int c);
    return (c == 2) ? 2 : 3;
  endfunction

  task automatic apply(int uv, int lv);
    int eu, el;
    u = W'(uv); l = W'(lv);
    #1;
    for (int c = 0; c < 3; c++) begin
      eu = uv; el = lv;
      case (c)
        0: rotate(eu, el, 3, BETA_SH, BETA_SG);
        1: rotate(eu, el, 3, GAMMA_SH, GAMMA_SG);
        default: rotate(eu, el, 2, ALPHA_SH, ALPHA_SG);
      endcase
      checks++;
      if (int'(uo[c]) != eu || int'(lo[c]) != el) begin
        failures++;
        if (failures < 10)
          $display("FAIL set=%0d in=(%0d,%0d) got (%0d,%0d) want (%0d,%0d)",
                   c, uv, lv, uo[c], lo[c], eu, el);
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
    static int corner [8] = '{0, 1, -1, 7, -8, 255, 510, -510};
    real phi, k, ang, len;
    foreach (corner[i]) foreach (corner[j]) apply(corner[i], corner[j]);
    repeat (3000) apply(int'($urandom_range(1020)) - 510, int'($urandom_range(1020)) - 510);

    // geometry: rotate (1500, 0) and measure angle and length
    u = 12'sd1500; l = '0;
    #1;
    for (int c = 0; c < 3; c++) begin
      phi = 0.0;
      for (int s = 0; s < nmicro(c); s++)
        phi += ((c == 0) ? BETA_SG[s] : (c == 1) ? GAMMA_SG[s] : ALPHA_SG[s])
               * $atan(2.0 ** (-1.0 * ((c == 2) ? ALPHA_SH[s] : BETA_SH[s])));
      k   = cordic_gain(nmicro(c), (c == 2) ? ALPHA_SH : BETA_SH);
      ang = $atan2(real'(lo[c]), real'(uo[c]));
      len = $sqrt(real'(uo[c]) * uo[c] + real'(lo[c]) * lo[c]);
      checks++;
      if ((ang - phi) > 0.003 || (phi - ang) > 0.003 ||
          (len - 1500.0 * k) > 4.0 || (1500.0 * k - len) > 4.0) begin
        failures++;
        $display("FAIL geometry set=%0d angle %f want %f, length %f want %f",
                 c, ang, phi, len, 1500.0 * k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
