// tb_dct_even_part: drives the even half with the a[0..3] values stage 1 would
// give for random and extreme signed 8-bit vectors, and compares X0, X4, X2, X6
// with the integer reference (butterflies and the alpha microrotations).
// Combinational, sampled 1 ns after each input.
module tb_dct_even_part;
  import tb_dct_ref_pkg::*;
  localparam int W = 12;
  int checks = 0, failures = 0;
  logic signed [W-1:0] a [4];
  logic signed [W-1:0] x0, x4, x2, x6;

  dct_even_part dut (.a(a), .x0(x0), .x4(x4), .x2(x2), .x6(x6));

  task automatic apply(int x [8]);
    int y [8], tr, x5n, av [4];
    for (int k = 0; k < 4; k++) av[k] = x[k] + x[7-k];
    for (int k = 0; k < 4; k++) a[k] = W'(av[k]);
    #1;
    dct8(x, y, tr, x5n);
    checks += 4;
    if (int'(x0) != y[0]) failures++;
    if (int'(x4) != y[4]) failures++;
    if (int'(x2) != y[2]) failures++;
    if (int'(x6) != y[6]) failures++;
    if ((int'(x0) != y[0] || int'(x4) != y[4] || int'(x2) != y[2] || int'(x6) != y[6])
        && failures < 10)
      $display("FAIL a=%0d %0d %0d %0d got %0d %0d %0d %0d want %0d %0d %0d %0d",
               av[0], av[1], av[2], av[3], x0, x4, x2, x6, y[0], y[4], y[2], y[6]);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [8];
    for (int p = 0; p < 256; p++) begin
      for (int n = 0; n < 8; n++) v[n] = p[n] ? 127 : -128;
      apply(v);
    end
    repeat (3000) begin
      for (int n = 0; n < 8; n++) v[n] = int'($urandom_range(255)) - 128;
      apply(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
