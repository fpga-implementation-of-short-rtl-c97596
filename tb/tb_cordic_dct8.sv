// tb_cordic_dct8: end-to-end test of the 8-point CORDIC DCT at its default
// sizes (8-bit samples, 12-bit outputs).
//
// Three kinds of check, each vector sampled 1 ns after it is applied (the
// circuit is combinational, so the result must be there with no clock):
//  * bit-exact: all eight outputs against the integer model of
//    tb_dct_ref_pkg, on every pattern of extreme samples (-128/127), DC
//    inputs, single impulses and random vectors;
//  * approximation: over the random vectors, each output is compared with the
//    exact DCT coefficient times its expected gain (1, K, Ka, sqrt2*K, ...);
//    the error energy must stay below 1% of the signal energy;
//  * mechanisms: the inverted negation must leave X3 and X7 exact and X5 one
//    LSB high (a DC input must give X5 = 1 and the other AC outputs 0), and
//    truncation in the shifts must have occurred. Each is counted, and a
//    mechanism that never happened is a failure.
module tb_cordic_dct8;
  import tb_dct_ref_pkg::*;

  localparam int IN_W = 8, W = 12;
  int checks = 0, failures = 0;
  logic signed [IN_W-1:0] x [8];
  logic signed [W-1:0]    X [8];

  int  n_trunc = 0, n_x5_bias = 0, n_x3x7_exact = 0, n_vectors = 0;
  real err_e [8], sig_e [8];

  cordic_dct8 dut (.x(x), .X(X));

  task automatic apply(int v [8], bit stats);
    int y [8], tr, x5n;
    real r;
    for (int n = 0; n < 8; n++) x[n] = IN_W'(v[n]);
    #1;
    dct8(v, y, tr, x5n);
    n_vectors++;
    if (tr > 0) n_trunc++;
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (int'(X[k]) != y[k]) begin
        failures++;
        if (failures < 10) $display("FAIL X%0d = %0d, want %0d", k, X[k], y[k]);
      end
    end
    // X5 with true negation would be one lower; X3 and X7 have no bias
    if (int'(X[5]) == x5n + 1) n_x5_bias++;
    if (int'(X[3]) == y[3] && int'(X[7]) == y[7]) n_x3x7_exact++;
    if (stats)
      for (int k = 0; k < 8; k++) begin
        r = out_gain(k) * dct_ref(v, k);
        err_e[k] += (real'(X[k]) - r) ** 2;
        sig_e[k] += r ** 2;
      end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [8];
    foreach (err_e[k]) begin err_e[k] = 0.0; sig_e[k] = 0.0; end

    // DC inputs: only X0 = 8c, and X5 = 1 from the uncompensated LSB
    for (int c = -128; c < 128; c += 17) begin
      foreach (v[n]) v[n] = c;
      apply(v, 0);
      checks++;
      if (int'(X[0]) != 8 * c || X[5] != 1 || X[1] != 0 || X[2] != 0 || X[3] != 0 ||
          X[4] != 0 || X[6] != 0 || X[7] != 0) begin
        failures++;
        $display("FAIL DC %0d: X0=%0d X5=%0d", c, X[0], X[5]);
      end
    end
    // impulses
    for (int p = 0; p < 8; p++) begin
      foreach (v[n]) v[n] = (n == p) ? 127 : 0;
      apply(v, 0);
      foreach (v[n]) v[n] = (n == p) ? -128 : 0;
      apply(v, 0);
    end
    // every pattern of extremes
    for (int p = 0; p < 256; p++) begin
      for (int n = 0; n < 8; n++) v[n] = p[n] ? 127 : -128;
      apply(v, 0);
    end
    // random vectors, also for the approximation statistics
    repeat (20000) begin
      for (int n = 0; n < 8; n++) v[n] = int'($urandom_range(255)) - 128;
      apply(v, 1);
    end

    for (int k = 0; k < 8; k++) begin
      checks++;
      $display("X%0d: gain %f, relative error energy %f", k, out_gain(k), err_e[k] / sig_e[k]);
      if (err_e[k] > 0.01 * sig_e[k]) begin
        failures++;
        $display("FAIL X%0d departs from the scaled DCT", k);
      end
    end

    $display("vectors %0d, with truncating shifts %0d, X5 one LSB high %0d, X3/X7 exact %0d",
             n_vectors, n_trunc, n_x5_bias, n_x3x7_exact);
    checks += 3;
    if (n_trunc == 0)      begin failures++; $display("FAIL no shift truncated"); end
    if (n_x5_bias == 0)    begin failures++; $display("FAIL X5 bias never seen"); end
    if (n_x3x7_exact == 0) begin failures++; $display("FAIL X3/X7 never exact"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
