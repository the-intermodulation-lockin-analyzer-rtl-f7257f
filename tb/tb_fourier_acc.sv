// tb_fourier_acc: feeds random products with gaps in `in_valid`, windows of
// random length and restarts (`first` in mid-window); checks each dumped I/Q
// sum against a sum kept in the testbench, and that sum_valid comes exactly
// one clock after the `last` product.
module tb_fourier_acc;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, sum_valid;
  logic signed [27:0] prod_i = 0, prod_q = 0;
  logic signed [51:0] sum_i, sum_q;
  int checks = 0, failures = 0;

  fourier_acc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ai, aq;
    int len, pos;
    logic expect_dump;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ai = 0; aq = 0;
    for (int w = 0; w < 60; w++) begin
      len = 1 + int'($urandom % 300);
      pos = 0;
      while (pos < len) begin
        in_valid = ($urandom % 4) != 0;
        prod_i = 28'($urandom); prod_q = 28'($urandom);
        if (w % 5 == 0) begin prod_i = 28'sh8000000; prod_q = 28'sh7ffffff; end
        first = (pos == 0);
        last  = (pos == len - 1);
        // a restart: drop the partial sum in the middle of a window
        if (w % 9 == 4 && pos == len / 2 && in_valid) first = 1;
        expect_dump = 0;
        if (in_valid) begin
          if (first) begin ai = 0; aq = 0; end
          ai += longint'(prod_i); aq += longint'(prod_q);
          expect_dump = last;
          pos++;
        end
        @(negedge clk);
        checks++;
        if (sum_valid != expect_dump) begin
          failures++; $display("sum_valid %0b exp %0b", sum_valid, expect_dump);
        end
        if (expect_dump) begin
          checks++;
          if (longint'(sum_i) != ai || longint'(sum_q) != aq) begin
            failures++; $display("sum %0d %0d exp %0d %0d", sum_i, sum_q, ai, aq);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
