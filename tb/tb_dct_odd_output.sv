// tb_dct_odd_output: checks the merged stages 5-6 of the odd half on random
// rotation outputs (|v| <= 500) and corners. Expected values are written with
// true negation: X1 = bu+gu, X7 = gl-bl, X3 = (bu-gu)-(bl+gl) exactly, and
// X5 = (bu-gu)+(bl+gl)+1, the one LSB the inversion leaves uncompensated.
// Combinational, sampled 1 ns after each input.
module tb_dct_odd_output;
  localparam int W = 12;
  int checks = 0, failures = 0;
  logic signed [W-1:0] bu, bl, gu, gl, x1, x5, x3, x7;

  dct_odd_output dut (.bu(bu), .bl(bl), .gu(gu), .gl(gl),
                      .x1(x1), .x5(x5), .x3(x3), .x7(x7));

  task automatic check(string nm, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s = %0d, want %0d", nm, got, want);
    end
  endtask

  task automatic apply(int pu, int pl, int qu, int ql);
    bu = W'(pu); bl = W'(pl); gu = W'(qu); gl = W'(ql);
    #1;
    check("X1", int'(x1), pu + qu);
    check("X7", int'(x7), ql - pl);
    check("X3", int'(x3), (pu - qu) - (pl + ql));
    check("X5", int'(x5), (pu - qu) + (pl + ql) + 1);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int c [5] = '{0, 1, -1, 500, -500};
    foreach (c[i]) foreach (c[j]) foreach (c[k]) foreach (c[m]) apply(c[i], c[j], c[k], c[m]);
    repeat (3000)
      apply(int'($urandom_range(1000)) - 500, int'($urandom_range(1000)) - 500,
            int'($urandom_range(1000)) - 500, int'($urandom_range(1000)) - 500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
