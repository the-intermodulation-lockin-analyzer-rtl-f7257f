// tb_host_regs: writes every configuration register and checks the decoded
// configuration and the read-back; loads random sums and checks each of the
// 128 sum words; checks the tuning words, frame counter, pulses (soft
// trigger, counter clear, stream pop, overflow clear) and the one-clock read
// latency.
module tb_host_regs;
  import imla_pkg::*;
  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0;
  logic [HOST_AW-1:0] host_addr = 0;
  logic [HOST_DW-1:0] host_wdata = 0, host_rdata;
  imla_cfg_t cfg;
  logic [PHASE_W-1:0] ftw [N_TONES];
  logic soft_trig, counter_clr, stream_pop, ovf_clr;
  logic sums_valid = 0;
  logic signed [ACC_W-1:0] sum_i [N_TONES], sum_q [N_TONES];
  logic [ACC_W-1:0] fb_amp = 0;
  logic [31:0] fb_phase = 0, counter_value = 0;
  logic [TD_W-1:0] stream_data = 0;
  logic stream_empty = 1, stream_overflow = 0;
  logic [14:0] stream_level = 0;
  int checks = 0, failures = 0;

  host_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [HOST_AW-1:0] a, input logic [31:0] d);
    host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(input logic [HOST_AW-1:0] a, output logic [31:0] d);
    host_re = 1; host_addr = a;
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] e);
    checks++;
    if (got !== e) begin failures++; $display("%s: got %h exp %h", what, got, e); end
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] f [N_TONES];
    logic [63:0] si, sq;
    for (int k = 0; k < N_TONES; k++) begin sum_i[k] = '0; sum_q[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // configuration registers
    wr(REG_WIN_LEN, 32'd61440);
    wr(REG_FB, 32'h0000_0D07);          // fb_div 7, fb_sel 13
    wr(REG_DRIVE, 32'h9000_4000);       // a1 0x4000, a2 0x9000
    wr(REG_FB_GAIN, 32'h0015_F123);     // P 0xF123, shift 21
    wr(REG_BIAS, 32'h0000_8001);
    wr(REG_CTRL, 32'h0000_0003);        // run, time mode
    expect32("win_len", 32'(cfg.win_len), 32'd61440);
    expect32("fb_div", 32'(cfg.fb_div), 7);
    expect32("fb_sel", 32'(cfg.fb_sel), 13);
    expect32("a1", 32'(cfg.a1), 32'h4000);
    expect32("a2", {16'd0, cfg.a2}, 32'h9000);
    expect32("p", {16'd0, cfg.p_gain}, 32'hF123);
    expect32("shift", 32'(cfg.p_shift), 21);
    expect32("vb", {16'd0, cfg.v_bias}, 32'h8001);
    expect32("run", 32'(cfg.run), 1);
    expect32("mode", 32'(cfg.mode), 32'(MODE_TIME));
    rd(REG_DRIVE, d);   expect32("rd drive", d, 32'h9000_4000);
    rd(REG_FB, d);      expect32("rd fb", d, 32'h0000_0D07);
    rd(REG_CTRL, d);    expect32("rd ctrl", d, 32'h3);
    rd(REG_FB_GAIN, d); expect32("rd gain", d, 32'h0015_F123);
    // tuning words
    for (int k = 0; k < N_TONES; k++) begin f[k] = $urandom; wr(REG_FREQ0 + HOST_AW'(k), f[k]); end
    for (int k = 0; k < N_TONES; k++) begin
      expect32("ftw", ftw[k], f[k]);
      rd(REG_FREQ0 + HOST_AW'(k), d); expect32("rd ftw", d, f[k]);
    end
    // sums
    for (int k = 0; k < N_TONES; k++) begin
      sum_i[k] = ACC_W'({$urandom, $urandom});
      sum_q[k] = ACC_W'({$urandom, $urandom});
    end
    for (int k = 0; k < N_TONES; k++) begin
      si = 64'(sum_i[k]); sq = 64'(sum_q[k]);
      rd(REG_SUM0 + HOST_AW'(4*k + 0), d); expect32("i lo", d, si[31:0]);
      rd(REG_SUM0 + HOST_AW'(4*k + 1), d); expect32("i hi", d, si[63:32]);
      rd(REG_SUM0 + HOST_AW'(4*k + 2), d); expect32("q lo", d, sq[31:0]);
      rd(REG_SUM0 + HOST_AW'(4*k + 3), d); expect32("q hi", d, sq[63:32]);
    end
    // frame counter and status
    stream_level = 15'd77; stream_overflow = 1;
    repeat (5) begin sums_valid = 1; @(negedge clk); sums_valid = 0; @(negedge clk); end
    rd(REG_STATUS, d); expect32("status", d, {15'd77, 1'b1, 16'd5});
    // pulses
    host_we = 1; host_addr = REG_CTRL; host_wdata = 32'h5;
    @(negedge clk); host_we = 0;
    expect32("soft_trig", 32'(soft_trig), 1);
    @(negedge clk);
    expect32("soft_trig clears", 32'(soft_trig), 0);
    host_we = 1; host_addr = REG_COUNTER; host_wdata = 0;
    @(negedge clk); host_we = 0;
    expect32("counter_clr", 32'(counter_clr), 1);
    host_we = 1; host_addr = REG_STATUS; host_wdata = 32'h1_0000;
    @(negedge clk); host_we = 0;
    expect32("ovf_clr", 32'(ovf_clr), 1);
    // other read-only registers
    counter_value = 32'hDEAD_BEEF; fb_amp = 52'h1_2345_6789_ABCD; fb_phase = 32'h8765_4321;
    stream_data = 16'hABCD; stream_empty = 0;
    rd(REG_COUNTER, d);   expect32("counter", d, 32'hDEAD_BEEF);
    rd(REG_FB_AMP_L, d);  expect32("amp lo", d, 32'h6789_ABCD);
    rd(REG_FB_AMP_H, d);  expect32("amp hi", d, 32'h0001_2345);
    rd(REG_FB_PHASE, d);  expect32("phase", d, 32'h8765_4321);
    host_re = 1; host_addr = REG_STREAM;
    #1 expect32("stream_pop", 32'(stream_pop), 1);
    @(negedge clk); host_re = 0;
    expect32("stream", host_rdata, 32'h0000_ABCD);
    // read latency: data appears one clock after host_re, holds after
    host_re = 1; host_addr = REG_WIN_LEN;
    #1 expect32("no early data", host_rdata, 32'h0000_ABCD);
    @(negedge clk); host_re = 0;
    expect32("rd win", host_rdata, 32'd61440);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
