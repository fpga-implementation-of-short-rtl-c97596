// tb_dct_input_stage: checks the stage-1 butterflies on corner vectors
// (all extremes, alternating signs) and random signed 8-bit samples, comparing
// each a[k] with x[k] + x[7-k] (k < 4) or x[7-k] - x[k] (k >= 4), computed
// in 32-bit integers.
// Combinational, sampled 1 ns after each input.
module tb_dct_input_stage;
  localparam int IN_W = 8, W = 12;
  int checks = 0, failures = 0;
  logic signed [IN_W-1:0] x [8];
  logic signed [W-1:0]    a [8];

  dct_input_stage dut (.x(x), .a(a));

  task automatic apply(int v [8]);
    int e [8];
    for (int n = 0; n < 8; n++) x[n] = IN_W'(v[n]);
    #1;
    for (int k = 0; k < 4; k++) begin
      e[k] = v[k] + v[7-k];
      e[7-k] = v[k] - v[7-k];
    end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (int'(a[k]) != e[k]) begin
        failures++;
        if (failures < 10) $display("FAIL a[%0d] = %0d, want %0d", k, a[k], e[k]);
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
    int v [8];
    for (int p = 0; p < 256; p++) begin     // every pattern of extremes
      for (int n = 0; n < 8; n++) v[n] = p[n] ? 127 : -128;
      apply(v);
    end
    repeat (2000) begin
      for (int n = 0; n < 8; n++) v[n] = int'($urandom_range(255)) - 128;
      apply(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
