// tb_event_counter: random event pulses and clears; checks the count every
// clock against a model, including a clear in the same clock as an event, and
// the wrap of a narrow counter.
module tb_event_counter;
  logic clk = 0, rst_n = 0, clr = 0, event_pulse = 0;
  logic [7:0] count;
  int checks = 0, failures = 0;

  event_counter #(.W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    e = 0;
    for (int k = 0; k < 5000; k++) begin
      event_pulse = ($urandom % 3) == 0;
      clr = ($urandom % 1500) == 0 || k == 2000 || k == 3000;
      if (k == 2000 || k == 3000) event_pulse = 1;
      if (clr) e = 8'(event_pulse);
      else if (event_pulse) e = e + 8'd1;
      @(negedge clk);
      checks++;
      if (count != e) begin failures++; if (failures < 10) $display("count %0d exp %0d", count, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
