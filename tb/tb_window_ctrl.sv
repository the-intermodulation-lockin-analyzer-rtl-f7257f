// tb_window_ctrl: runs window lengths and feedback dividers, with and without
// triggers, and checks every slot's flags against a reference position kept
// in the testbench; also checks that windows are exactly N clocks apart.
module tb_window_ctrl;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, trig = 0;
  logic [WIN_W-1:0] win_len = 1, count;
  logic [FB_DIV_W-1:0] fb_div = 0;
  logic valid, first, last, fb_first, fb_last;
  int checks = 0, failures = 0;

  window_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int n, input int div, input int slots, input bit with_trig);
    int pos, fbpos, fbl, nn, dd, since_last, last_seen;
    nn = (n == 0) ? 1 : n;
    dd = (div > 10) ? 10 : div;
    fbl = nn >> dd; if (fbl == 0) fbl = 1;
    win_len = WIN_W'(n); fb_div = FB_DIV_W'(div);
    run = 0; trig = 0;
    @(negedge clk);
    run = 1;
    pos = 0; fbpos = 0; last_seen = -1;
    for (int s = 0; s < slots; s++) begin
      // flags of this slot, before the clock edge
      #1;
      checks++;
      if (!valid || first != (pos == 0) || last != (pos == nn - 1) ||
          fb_first != (fbpos == 0) || fb_last != (fbpos == fbl - 1 || pos == nn - 1) ||
          count != WIN_W'(pos)) begin
        failures++;
        if (failures < 10) $display("n=%0d div=%0d s=%0d pos=%0d fbpos=%0d flags %b%b%b%b cnt %0d",
                                    n, div, s, pos, fbpos, first, last, fb_first, fb_last, count);
      end
      if (last) begin
        if (last_seen >= 0 && !with_trig) begin
          checks++;
          if (s - last_seen != nn) begin failures++; $display("period %0d", s - last_seen); end
        end
        last_seen = s;
      end
      trig = with_trig && ($urandom % 97 == 0);
      // reference position of the next slot
      if (trig) begin pos = 0; fbpos = 0; end
      else begin
        fbpos = (fbpos == fbl - 1 || pos == nn - 1) ? 0 : fbpos + 1;
        pos   = (pos == nn - 1) ? 0 : pos + 1;
      end
      @(negedge clk);
      trig = 0;
    end
    run = 0;
    @(negedge clk);
    checks++;
    if (valid || first || last) begin failures++; $display("flags while stopped"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_case(10, 0, 50, 0);
    run_case(10, 2, 50, 0);
    run_case(1024, 10, 3000, 0);
    run_case(100, 3, 2000, 0);
    run_case(0, 0, 20, 0);
    run_case(7, 12, 40, 0);
    run_case(200, 4, 4000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
