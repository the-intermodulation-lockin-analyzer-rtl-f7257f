// tb_stream_fifo: random writes and reads against a queue model, in phases
// that fill the buffer to overflow and drain it; checks data order, empty,
// full, level and the sticky overflow flag.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, ovf_clr = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic empty, full, overflow;
  logic [4:0] level;
  int checks = 0, failures = 0;

  stream_fifo #(.W(16), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] q [$];
    logic eovf;
    int wr_pct, ovf_seen;
    repeat (2) @(negedge clk);
    rst_n = 1;
    eovf = 0; ovf_seen = 0;
    for (int k = 0; k < 6000; k++) begin
      wr_pct = ((k / 500) % 2 == 0) ? 85 : 20;
      wr_en = ($urandom % 100) < wr_pct;
      rd_en = ($urandom % 100) < 50;
      wr_data = 16'($urandom);
      ovf_clr = (k % 700 == 0);
      // check the outputs of this clock against the model
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 16) || int'(level) != q.size() ||
          overflow != eovf || (q.size() > 0 && rd_data != q[0])) begin
        failures++;
        if (failures < 10) $display("k=%0d level %0d exp %0d ovf %0b exp %0b", k, level, q.size(), overflow, eovf);
      end
      // model the clock edge
      begin
        bit do_rd, do_wr;
        do_rd = rd_en && q.size() > 0;
        do_wr = wr_en && (q.size() < 16 || do_rd);
        if (do_rd) void'(q.pop_front());
        if (do_wr) q.push_back(wr_data);
        if (ovf_clr) eovf = 0;
        else if (wr_en && !do_wr) begin eovf = 1; ovf_seen++; end
      end
      @(negedge clk);
    end
    checks++;
    if (ovf_seen == 0) begin failures++; $display("overflow never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
