// tb_mixer: random samples and references; checks both products, the valid
// and flag forwarding and the one-clock latency.
module tb_mixer;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [3:0] in_flags = 0, out_flags;
  logic signed [11:0] x = 0;
  logic signed [15:0] ref_i = 0, ref_q = 0;
  logic signed [27:0] prod_i, prod_q;
  int checks = 0, failures = 0;

  mixer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    logic ev;
    logic [3:0] ef;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      x = 12'($urandom); ref_i = 16'($urandom); ref_q = 16'($urandom);
      if (i % 7 == 0) begin x = -12'sd2048; ref_i = -16'sd32768; ref_q = 16'sd32767; end
      in_valid = 1'($urandom); in_flags = 4'($urandom);
      ei = longint'(x) * longint'(ref_i);
      eq = longint'(x) * longint'(ref_q);
      ev = in_valid; ef = in_valid ? in_flags : 4'b0;
      @(negedge clk);
      checks++;
      if (longint'(prod_i) != ei || longint'(prod_q) != eq || out_valid != ev || out_flags != ef) begin
        failures++;
        if (failures < 10) $display("got %0d %0d exp %0d %0d", prod_i, prod_q, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
