// tb_trig_sync: drives an asynchronous input (edges between clock edges) with
// pulses of random width and gap; checks one output pulse per rising edge,
// each one clock wide, three clocks after the edge is first sampled.
module tb_trig_sync;
  logic clk = 0, rst_n = 0, async_in = 0, level, pulse;
  int checks = 0, failures = 0;
  int edges = 0, pulses = 0;
  int since_edge = -1;

  trig_sync dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: count clocks from the first clock that sees the new level
  logic prev_in = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (pulse) begin
        pulses++;
        checks++;
        if (since_edge != 3) begin failures++; $display("latency %0d", since_edge); end
      end
      if (async_in && !prev_in) since_edge = 1;
      else if (since_edge > 0) since_edge++;
      prev_in = async_in;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      #(1 + $urandom % 3);
      async_in = 1; edges++;
      repeat (2 + $urandom % 5) @(posedge clk);
      #(1 + $urandom % 8);
      async_in = 0;
      repeat (4 + $urandom % 6) @(posedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (edges != pulses) begin failures++; $display("edges %0d pulses %0d", edges, pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
