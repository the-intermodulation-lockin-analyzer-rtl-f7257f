// tb_td_decimator: random samples with gaps in `in_valid`; every 16 valid
// samples must give one output equal to their sum, one clock after the 16th,
// and nothing in between; `clr` restarts the block.
module tb_td_decimator;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, out_valid;
  logic signed [11:0] x = 0;
  logic signed [15:0] y;
  int checks = 0, failures = 0;

  td_decimator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, acc, outs;
    logic exp_v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0; acc = 0; outs = 0;
    for (int k = 0; k < 8000; k++) begin
      in_valid = ($urandom % 5) != 0;
      x = 12'($urandom);
      if (k % 13 == 0) x = -12'sd2048;
      clr = (k == 3001);
      exp_v = 0;
      if (clr) begin n = 0; acc = 0; end
      else if (in_valid) begin
        acc += int'(x); n++;
        if (n == 16) begin exp_v = 1; end
      end
      @(negedge clk);
      checks++;
      if (out_valid != exp_v || (exp_v && int'(y) != acc)) begin
        failures++;
        if (failures < 10) $display("k=%0d out %0b %0d exp %0b %0d", k, out_valid, y, exp_v, acc);
      end
      if (exp_v) begin n = 0; acc = 0; outs++; end
    end
    checks++;
    if (outs < 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
