// tb_nco: checks the phase accumulator and the cos/sin references of nco
// against 32767 * cos/sin of the previous clock's full 32-bit phase, within
// 3 LSB (10-bit table plus first-order correction); checks the one-clock
// latency and the phase clear.
module tb_nco;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, phase_clr = 1;
  logic [31:0] ftw, phase;
  ref_t ref_i, ref_q;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;

  nco dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tone(input logic [31:0] f, input int n);
    logic [31:0] exp_ph, prev_ph;
    real ec, es;
    ftw = f;
    phase_clr = 1;
    @(negedge clk);
    @(negedge clk);
    checks++; if (phase !== 32'd0) begin failures++; $display("clear failed"); end
    phase_clr = 0;
    exp_ph = 0;
    for (int i = 0; i < n; i++) begin
      prev_ph = exp_ph;
      exp_ph  = exp_ph + f;
      @(negedge clk);
      checks++;
      if (phase !== exp_ph) begin
        failures++; $display("phase %h exp %h", phase, exp_ph);
      end
      ec = 32767.0 * $cos(2.0 * PI * real'(prev_ph) / 4294967296.0);
      es = 32767.0 * $sin(2.0 * PI * real'(prev_ph) / 4294967296.0);
      checks++;
      if ((real'(ref_i) - ec > 3.0) || (ec - real'(ref_i) > 3.0) ||
          (real'(ref_q) - es > 3.0) || (es - real'(ref_q) > 3.0)) begin
        failures++;
        if (failures < 10) $display("ref %0d %0d exp %f %f at %h", ref_i, ref_q, ec, es, prev_ph);
      end
    end
  endtask

  initial begin
    ftw = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_tone(32'h0040_0000, 1100);         // one table step per sample
    run_tone(32'd12345678, 2000);
    run_tone($urandom, 2000);
    run_tone(32'hFFC0_0000, 600);          // negative frequency
    run_tone(32'd7654321, 3000);           // uses the correction throughout
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
