// tb_cordic: random and corner I/Q vectors in all quadrants; amplitude must
// match sqrt(I^2+Q^2) to 1e-4 relative (+2 LSB), phase atan2(Q,I) to 2e-6 of a
// turn; `done` must rise exactly ITERS+1 clocks after the clock that takes
// `start`.
module tb_cordic;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [51:0] in_i = 0, in_q = 0;
  logic [51:0] amp;
  logic [31:0] phase;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;

  cordic dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input longint i, input longint q);
    real ea, ep, gp, da, dp;
    int lat;
    in_i = 52'(i); in_q = 52'(q);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (lat != CORDIC_ITERS + 1) begin failures++; $display("latency %0d", lat); end
    ea = $sqrt(real'(i) * real'(i) + real'(q) * real'(q));
    ep = $atan2(real'(q), real'(i)) / (2.0 * PI);
    gp = real'($signed(phase)) / 4294967296.0;
    da = real'(amp) - ea; if (da < 0) da = -da;
    dp = gp - ep; if (dp < 0) dp = -dp; if (dp > 0.5) dp = 1.0 - dp;
    checks++;
    if (da > ea * 1e-4 + 2.0 || dp > 2e-6) begin
      failures++;
      if (failures < 10) $display("i=%0d q=%0d amp %0d exp %f phase %f exp %f", i, q, amp, ea, gp, ep);
    end
  endtask

  initial begin
    longint r1, r2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(1000000, 0); one(0, 1000000); one(-1000000, 0); one(0, -1000000);
    one(-123456789, -987654321); one(-(64'sd1 <<< 50), 64'sd1 <<< 50);
    one((64'sd1 <<< 51) - 1, (64'sd1 <<< 51) - 1);
    for (int k = 0; k < 400; k++) begin
      r1 = longint'({$urandom, $urandom}) >>> (13 + $urandom % 30);
      r2 = longint'({$urandom, $urandom}) >>> (13 + $urandom % 30);
      if (r1 > -4000 && r1 < 4000 && r2 > -4000 && r2 < 4000) r1 = 5000;  // phase needs resolution
      one(r1, r2);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
