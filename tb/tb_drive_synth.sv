// tb_drive_synth: random references and amplitudes, including full-scale
// values that clip; checks (A1*r1 + A2*r2) >>> 15 saturated to 16 bits one
// clock later, and zero output while disabled.
module tb_drive_synth;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [15:0] ref1 = 0, ref2 = 0, a1 = 0, a2 = 0, dac;
  int checks = 0, failures = 0;

  drive_synth dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      ref1 = 16'($urandom); ref2 = 16'($urandom); a1 = 16'($urandom); a2 = 16'($urandom);
      if (k % 5 == 0) begin ref1 = 32767; ref2 = 32767; a1 = 32767; a2 = 32767; end
      en = (k % 11) != 0;
      e = (longint'(ref1) * longint'(a1) + longint'(ref2) * longint'(a2)) >>> 15;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      if (!en) e = 0;
      @(negedge clk);
      checks++;
      if (longint'(dac) != e) begin
        failures++;
        if (failures < 10) $display("dac %0d exp %0d", dac, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
