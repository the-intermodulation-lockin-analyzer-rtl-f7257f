// tb_sync_clk_gen: at the default 61.4 MHz sample clock, counts output rising
// edges over 61,400 clocks (1 ms) and expects 10,000 +- 1 (10 MHz); checks that
// high and low phases are each 3 or 4 clocks long (61.4 / 10 = 6.14).
module tb_sync_clk_gen;
  logic clk = 0, rst_n = 0, clk_out;
  int checks = 0, failures = 0;

  sync_clk_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rises, run_len;
    logic prev;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    rises = 0; prev = clk_out; run_len = 0;
    for (int k = 0; k < 61400; k++) begin
      @(negedge clk);
      if (clk_out && !prev) rises++;
      if (clk_out != prev) begin
        if (k > 20) begin
          checks++;
          if (run_len < 3 || run_len > 4) begin failures++; if (failures < 10) $display("phase length %0d", run_len); end
        end
        run_len = 1;
      end else run_len++;
      prev = clk_out;
    end
    checks++;
    if (rises < 9999 || rises > 10001) begin failures++; $display("rises %0d", rises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
