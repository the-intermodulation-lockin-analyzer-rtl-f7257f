// tb_feedback_out: random amplitude, gain, shift and bias, including cases
// that saturate; checks V_b + (P*A >>> shift), clipped to 16 bits, and that the
// product term holds between amp_valid pulses.
module tb_feedback_out;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, amp_valid = 0;
  logic [51:0] amp = 0;
  logic signed [15:0] p_gain = 0, v_bias = 0, dac;
  logic [5:0] p_shift = 0;
  int checks = 0, failures = 0;

  feedback_out dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(input longint v, input longint lim);
    if (v > lim - 1) return lim - 1;
    if (v < -lim) return -lim;
    return v;
  endfunction

  initial begin
    longint term, e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    term = 0;
    for (int k = 0; k < 3000; k++) begin
      amp = 52'({$urandom, $urandom} >> (24 + $urandom % 40));  // below 2^40
      p_gain = 16'($urandom);
      p_shift = 6'(10 + $urandom % 30);
      v_bias = 16'($urandom);
      if (k % 3 == 0) v_bias = 16'($signed(16'($urandom)) >>> 4);
      amp_valid = ($urandom % 3) != 0;
      if (amp_valid)
        term = (longint'(amp) * longint'(p_gain)) >>> p_shift;
      e = sat(term + longint'(v_bias), 32768);
      @(negedge clk);      // term registered
      amp_valid = 0;
      @(negedge clk);      // dac registered
      checks++;
      if (longint'(dac) != e) begin
        failures++;
        if (failures < 10) $display("dac %0d exp %0d (amp %0d P %0d sh %0d Vb %0d)", dac, e, amp, p_gain, p_shift, v_bias);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
