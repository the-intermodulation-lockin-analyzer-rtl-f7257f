// tb_imla_top: end-to-end test of the analyzer at its default parameters.
//
// A model of a nonlinear device closes the loop from the drive DAC to the ADC:
// adc = u - u^3 / 2^24 with u = drive / 16, a cubic (Duffing-like) nonlinearity
// that creates odd-order intermodulation products of the two drive tones.
// All 32 references sit on multiples of the base frequency fs/1024 and the
// lockin window is N = 1024 samples, so every tone has a whole number of
// periods per window. The drive tones are at 40 and 44 times the base
// frequency; the other references watch intermodulation products (36, 48, 32,
// 52, ...) and bins where none fall (41, 43, ...).
//
// The testbench records every ADC sample it applies and, for every closed
// window, computes the 64 Fourier sums itself with real cos/sin, then reads
// the design's sums over the host port and compares them (tolerance: 2 LSB of
// reference error per sample). It also checks the CORDIC amplitude and phase
// of the feedback frequency against its own sums, the feedback DAC formula,
// the time-domain stream (sums of 16 samples), the FIFO overflow flag, the
// event counter and the 10 MHz sync output. Each mechanism is counted; one
// that never happened is a failure.
module tb_imla_top;
  import imla_pkg::*;

  localparam int N      = 1024;
  localparam int MAXC   = 150000;
  localparam real PI    = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_data;
  logic signed [DAC_W-1:0] dac_drive, dac_feedback;
  logic ext_trig_in = 0, counter_trig_in = 0, sync_out;
  logic host_we = 0, host_re = 0;
  logic [HOST_AW-1:0] host_addr = 0;
  logic [HOST_DW-1:0] host_wdata = 0, host_rdata;
  logic sums_irq;

  imla_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // tone multiples of the base frequency fs/1024
  int mult [N_TONES] = '{40, 44, 36, 48, 32, 52, 28, 56, 41, 43, 4, 84, 80, 88, 120, 132,
                         1, 2, 3, 5, 7, 11, 13, 17, 19, 23, 29, 31, 37, 45, 60, 100};

  // ---- device model: cubic nonlinearity, enabled or not ----------------------
  bit nonlinear = 1;
  always_comb begin
    int u, y;
    u = int'(dac_drive) >>> 4;
    y = nonlinear ? u - ((u * u / 2048) * u) / 8192 : u;
    if (y > 2047) y = 2047;
    if (y < -2048) y = -2048;
    adc_data = ADC_W'(y);
  end

  // ---- record what the design saw, one entry per clock -----------------------
  int cyc = 0;
  int adc_rec [MAXC];
  bit last_rec [MAXC];
  bit fb_last_rec [MAXC];
  bit td_rec [MAXC];
  int n_restart = 0, n_windows = 0, n_fb = 0, n_imp = 0, n_stream = 0,
      n_ovf = 0, n_count = 0, n_sync = 0, n_trig = 0;
  bit prev_last = 1, prev_sync = 0;
  int sync_rises = 0;
  logic [3:0] fb_div_cfg = 2;

  always @(posedge clk) begin
    if (cyc < MAXC) begin
      adc_rec[cyc]     = int'(adc_data);
      last_rec[cyc]    = dut.wc_last;
      fb_last_rec[cyc] = dut.wc_fb_last;
      td_rec[cyc]      = dut.td_mode;
    end
    if (dut.wc_valid && c_run < 0) c_run = cyc;
    if (dut.wc_first && !prev_last) n_restart++;   // window restarted by a trigger
    if (dut.wc_valid) prev_last = dut.wc_last;
    if (sync_out && !prev_sync) sync_rises++;
    prev_sync = sync_out;
    cyc++;
  end

  initial begin
    repeat (MAXC - 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host port ---------------------------------------------------------------
  task automatic wr(input logic [HOST_AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(input logic [HOST_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    host_re = 1; host_addr = a;
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  // ---- reference computations ------------------------------------------------
  function automatic real ref_cos(input int m, input int n);
    int addr;
    addr = (m * n) % 1024;
    return $floor(32767.0 * $cos(2.0 * PI * real'(addr) / 1024.0) + 0.5);
  endfunction
  function automatic real ref_sin(input int m, input int n);
    int addr;
    addr = (m * n) % 1024;
    return $floor(32767.0 * $sin(2.0 * PI * real'(addr) / 1024.0) + 0.5);
  endfunction

  // sums over the samples of clocks start..start+len-1; the references run
  // freely from the first sample after `run` was set (clock c_run), so the
  // sample of clock c meets phase (c - c_run) * m / 1024 turns
  int c_run = -1;
  task automatic model_sums(input int m, input int start, input int len,
                            output real si, output real sq, output real tol);
    si = 0; sq = 0; tol = 0;
    for (int n = 0; n < len; n++) begin
      si += real'(adc_rec[start + n]) * ref_cos(m, start + n - c_run);
      sq += real'(adc_rec[start + n]) * ref_sin(m, start + n - c_run);
      tol += 2.0 * ((adc_rec[start + n] < 0) ? -adc_rec[start + n] : adc_rec[start + n]);
    end
  endtask

  function automatic real absr(input real v);
    return (v < 0) ? -v : v;
  endfunction

  // ---- check one closed lockin window -------------------------------------------
  task automatic check_window();
    int lastc, start;
    logic [31:0] lo, hi, f0, f1;
    longint gi, gq;
    real si, sq, tol, mag_imp, mag_off;
    // the window ended at the most recent recorded `last` (3 clocks ago)
    lastc = cyc - 1;
    while (lastc > 0 && !last_rec[lastc]) lastc--;
    start = lastc - N + 1;
    rd(REG_STATUS, f0);
    mag_imp = 0; mag_off = 0;
    for (int k = 0; k < N_TONES; k++) begin
      rd(REG_SUM0 + HOST_AW'(4*k + 0), lo); rd(REG_SUM0 + HOST_AW'(4*k + 1), hi);
      gi = longint'({hi, lo});
      rd(REG_SUM0 + HOST_AW'(4*k + 2), lo); rd(REG_SUM0 + HOST_AW'(4*k + 3), hi);
      gq = longint'({hi, lo});
      model_sums(mult[k], start, N, si, sq, tol);
      checks++;
      if (absr(real'(gi) - si) > tol + 1.0 || absr(real'(gq) - sq) > tol + 1.0) begin
        failures++;
        if (failures < 20) $display("window at %0d tone %0d (m=%0d): got %0d %0d exp %f %f", start, k, mult[k], gi, gq, si, sq);
      end
      if (mult[k] == 36) mag_imp = $sqrt(si * si + sq * sq);
      if (mult[k] == 41) mag_off = $sqrt(si * si + sq * sq);
    end
    rd(REG_STATUS, f1);
    checks++;
    if (f0[15:0] != f1[15:0]) begin failures++; $display("sums changed during read-out"); end
    n_windows++;
    if (nonlinear && mag_imp > 100.0 * (mag_off + 1.0)) n_imp++;
  endtask

  // ---- check every feedback update --------------------------------------------
  always @(posedge clk) begin
    if (dut.cordic_done) begin : fb_chk
      int lastc, len, startc;
      real si, sq, tol, ea, ep, gp, dp;
      // the feedback window that ended most recently before the CORDIC ran
      lastc = cyc - CORDIC_ITERS - 3;
      while (lastc > 0 && !fb_last_rec[lastc]) lastc--;
      len = N >> fb_div_cfg;
      startc = lastc - len + 1;
      model_sums(mult[0], startc, len, si, sq, tol);
      ea = $sqrt(si * si + sq * sq);
      ep = $atan2(sq, si) / (2.0 * PI);
      gp = real'($signed(dut.fb_phase)) / 4294967296.0;
      dp = absr(gp - ep); if (dp > 0.5) dp = 1.0 - dp;
      checks++;
      if (absr(real'(dut.fb_amp) - ea) > 1.5 * tol + ea * 1e-4 + 2.0 || (ea > 1e5 && dp > 1e-3)) begin
        failures++;
        if (failures < 20) $display("feedback at %0d: amp %0d exp %f phase %f exp %f", cyc, dut.fb_amp, ea, gp, ep);
      end
      n_fb++;
    end
  end

  // feedback DAC = sat(V_b + (P * A) >>> shift), two clocks after done
  localparam int P_GAIN = 300, P_SHIFT = 30, V_BIAS = -5000;
  logic [ACC_W-1:0] amp_d1, amp_d2;
  logic done_d1, done_d2;
  always @(posedge clk) begin
    if (done_d2) begin : dac_chk
      longint e;
      e = ((longint'(amp_d2) * P_GAIN) >>> P_SHIFT) + V_BIAS;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (longint'(dac_feedback) != e) begin
        failures++; $display("dac_feedback %0d exp %0d", dac_feedback, e);
      end
    end
    done_d2 <= done_d1; amp_d2 <= amp_d1;
    done_d1 <= dut.cordic_done; amp_d1 <= dut.fb_amp;
  end

  // ---- the test ----------------------------------------------------------------
  initial begin
    logic [31:0] d;
    int c0, blk, e, wins;
    done_d1 = 0; done_d2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configuration
    for (int k = 0; k < N_TONES; k++) wr(REG_FREQ0 + HOST_AW'(k), 32'(mult[k]) << 22);
    wr(REG_WIN_LEN, N);
    wr(REG_DRIVE, {16'h3000, 16'h3000});
    wr(REG_FB, {19'd0, 5'd0, 4'd0, fb_div_cfg});
    wr(REG_FB_GAIN, {10'd0, 6'(P_SHIFT), 16'(P_GAIN)});
    wr(REG_BIAS, 32'(16'(V_BIAS)));
    wr(REG_CTRL, 32'h1);                                   // run, lockin mode

    // lockin mode: windows, one of them restarted by the external trigger
    wins = 0;
    while (wins < 6) begin
      @(posedge clk);
      if (sums_irq) begin
        check_window();
        wins++;
        if (wins == 2) begin          // trigger in the middle of the next window
          repeat (300) @(negedge clk);
          ext_trig_in = 1; n_trig++;
          repeat (4) @(negedge clk);
          ext_trig_in = 0;
        end
        if (wins == 4) nonlinear = 0; // a linear device: no intermodulation
      end
    end
    nonlinear = 1;

    // counter input
    for (int k = 0; k < 17; k++) begin
      counter_trig_in = 1; repeat (3) @(negedge clk);
      counter_trig_in = 0; repeat (3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    rd(REG_COUNTER, d);
    checks++;
    if (d != 17) begin failures++; $display("counter %0d", d); end else n_count++;

    // sync output: 10 MHz from 61.4 MHz
    begin
      int r0;
      r0 = sync_rises;
      repeat (6140) @(negedge clk);
      checks++;
      if (sync_rises - r0 < 999 || sync_rises - r0 > 1001) begin
        failures++; $display("sync rises %0d", sync_rises - r0);
      end else n_sync++;
    end

    // time-domain mode: the stream holds sums of 16 consecutive samples
    wr(REG_CTRL, 32'h3);
    repeat (16 * 40) @(negedge clk);
    c0 = 0;
    while (!td_rec[c0]) c0++;
    for (int j = 0; j < 30; j++) begin
      rd(REG_STREAM, d);
      blk = 0;
      for (int s = 0; s < 16; s++) blk += adc_rec[c0 - 1 + 16 * j + s];
      checks++;
      if (d[31] || int'($signed(d[15:0])) != blk) begin
        failures++; if (failures < 20) $display("stream %0d: got %0d exp %0d", j, $signed(d[15:0]), blk);
      end else n_stream++;
    end
    // let the buffer overflow: the host stops reading
    repeat (16 * 1100) @(negedge clk);
    rd(REG_STATUS, d);
    checks++;
    if (!d[16]) begin failures++; $display("no overflow flagged"); end else n_ovf++;
    wr(REG_STATUS, 32'h1_0000);
    wr(REG_CTRL, 32'h0);

    // every mechanism must have happened
    $display("windows=%0d restarts=%0d triggers=%0d imp_detected=%0d feedback_updates=%0d stream_ok=%0d overflow=%0d counter=%0d sync=%0d",
             n_windows, n_restart, n_trig, n_imp, n_fb, n_stream, n_ovf, n_count, n_sync);
    checks++; if (n_windows < 6)  begin failures++; $display("too few windows"); end
    checks++; if (n_restart < 1)  begin failures++; $display("no trigger restart"); end
    checks++; if (n_imp < 2)      begin failures++; $display("intermodulation not detected"); end
    checks++; if (n_fb < 8)       begin failures++; $display("too few feedback updates"); end
    checks++; if (n_stream < 30)  begin failures++; $display("stream not checked"); end
    checks++; if (n_ovf < 1)      begin failures++; $display("no overflow"); end
    checks++; if (n_count < 1)    begin failures++; $display("counter not checked"); end
    checks++; if (n_sync < 1)     begin failures++; $display("sync not checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
