// tb_lockin_workloads: the analyzer at its default parameters, run in the two
// lockin configurations that matter in practice, with full-length windows.
//
// Workload A, intermodulation AFM: a cantilever resonance near 350 kHz is
// driven by two tones about 470 Hz apart. The window is N = 2^17 samples
// (base frequency fs/2^17 = 468.4 Hz), the drive tones are at 747 and 748
// times the base (349.9 and 350.4 kHz) and the other 30 references cover the
// rest of the band from 732 to 763 times the base, where the intermodulation products of a
// weakly nonlinear oscillator fall. The feedback runs at its fastest rate,
// 1024 updates per window (128-sample feedback windows), on the first tone.
// The testbench checks all 64 sums of one window, every feedback update, the
// purity of the drive DAC (no spur above -75 dB relative to one tone) and
// that the intermodulation products 2f1-f2 and 2f2-f1 stand out of the
// empty bins.
//
// Workload B, 1 kHz measurement bandwidth: N = 61,400 samples (fs/1 kHz).
// This N is not a power of two, so a 32-bit tuning word cannot hit m * 1 kHz
// exactly; the host writes ftw = round(m * 2^32 / N), and the model here
// follows the references' exact phase, n * ftw modulo 2^32, instead of
// assuming whole periods. Drive tones at 289 and 290 kHz, references from
// 280 to 311 kHz. Two consecutive windows are checked, which also checks that
// the windows are back to back (61,400 clocks apart).
//
// A cubic device model closes the loop from the drive DAC to the ADC, as in
// the end-to-end test: adc = u - u^3 / 2^24 with u = drive / 16. The model of
// the sums uses ideal cos/sin of the full 32-bit phase, with a tolerance of
// 3 LSB of reference error per sample, and is independent of the sine table.
// Workload C, time-domain mode: the AFM drive of workload A with the stream
// on. One beat of the two tones lasts 2^17 samples, which is 8192 words of
// the stream (sums of 16 samples). The host reads the whole beat as it comes;
// every word must equal the sum of its 16 ADC samples, in order, with none
// missing and no overflow.
//
// Each check is counted and each workload must have run.
module tb_lockin_workloads;
  import imla_pkg::*;

  localparam int  NA    = 1 << 17;
  localparam int  NB    = 61400;
  localparam int  MAXC  = 600000;
  localparam real PI    = 3.14159265358979323846;
  localparam real TWO32 = 4294967296.0;

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

  // ---- device model --------------------------------------------------------------
  always_comb begin
    int u, y;
    u = int'(dac_drive) >>> 4;
    y = u - ((u * u / 2048) * u) / 8192;
    if (y > 2047) y = 2047;
    if (y < -2048) y = -2048;
    adc_data = ADC_W'(y);
  end

  // ---- recording ----------------------------------------------------------------
  int cyc = 0;
  int adc_rec [MAXC];
  int drv_rec [MAXC];
  bit last_rec [MAXC];
  bit fb_last_rec [MAXC];
  bit td_rec [MAXC];
  int c_run = -1;          // first clock with a valid sample after run was set
  logic [31:0] ftw_cfg [N_TONES];
  int n_len = NA;

  always @(posedge clk) begin
    if (cyc < MAXC) begin
      adc_rec[cyc]     = int'(adc_data);
      drv_rec[cyc]     = int'(dac_drive);
      last_rec[cyc]    = dut.wc_last;
      fb_last_rec[cyc] = dut.wc_fb_last;
      td_rec[cyc]      = dut.td_mode;
    end
    if (dut.wc_valid && c_run < 0) c_run = cyc;
    cyc++;
  end

  initial begin
    repeat (MAXC - 10) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host port --------------------------------------------------------------------
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

  function automatic real absr(input real v);
    return (v < 0) ? -v : v;
  endfunction

  // ---- model of the sums: ideal references of the exact 32-bit phase -----------------
  task automatic model_sums(input logic [31:0] ftw, input int start, input int len,
                            output real si, output real sq, output real tol);
    logic [31:0] ph;
    real a;
    si = 0; sq = 0; tol = 0;
    for (int n = 0; n < len; n++) begin
      ph = ftw * 32'(start + n - c_run);
      a  = 2.0 * PI * real'(ph) / TWO32;
      si += real'(adc_rec[start + n]) * 32767.0 * $cos(a);
      sq += real'(adc_rec[start + n]) * 32767.0 * $sin(a);
      tol += 3.0 * real'((adc_rec[start + n] < 0) ? -adc_rec[start + n] : adc_rec[start + n]);
    end
  endtask

  // check the 64 sums of the window that closed most recently; returns the
  // clock of its last sample and the magnitudes of all tones
  task automatic check_window(input string tag, output int lastc, output real mag [N_TONES]);
    int start;
    logic [31:0] lo, hi, f0, f1;
    longint gi, gq;
    real si, sq, tol;
    lastc = cyc - 1;
    while (lastc > 0 && !last_rec[lastc]) lastc--;
    start = lastc - n_len + 1;
    rd(REG_STATUS, f0);
    for (int k = 0; k < N_TONES; k++) begin
      rd(REG_SUM0 + HOST_AW'(4*k + 0), lo); rd(REG_SUM0 + HOST_AW'(4*k + 1), hi);
      gi = longint'({hi, lo});
      rd(REG_SUM0 + HOST_AW'(4*k + 2), lo); rd(REG_SUM0 + HOST_AW'(4*k + 3), hi);
      gq = longint'({hi, lo});
      model_sums(ftw_cfg[k], start, n_len, si, sq, tol);
      mag[k] = $sqrt(si * si + sq * sq);
      checks++;
      if (absr(real'(gi) - si) > tol + 1.0 || absr(real'(gq) - sq) > tol + 1.0) begin
        failures++;
        if (failures < 20) $display("%s: tone %0d got %0d %0d exp %f %f tol %f", tag, k, gi, gq, si, sq, tol);
      end
    end
    rd(REG_STATUS, f1);
    checks++;
    if (f0[15:0] != f1[15:0]) begin failures++; $display("%s: sums changed during read-out", tag); end
  endtask

  // ---- feedback updates (workload A) ---------------------------------------------------
  bit fb_on = 0;
  int fb_len = NA >> 10;
  int n_fb = 0;
  always @(posedge clk) begin
    if (dut.cordic_done && fb_on) begin : fb_chk
      int lastc, startc;
      real si, sq, tol, ea, ep, gp, dp;
      lastc = cyc - CORDIC_ITERS - 3;
      while (lastc > 0 && !fb_last_rec[lastc]) lastc--;
      startc = lastc - fb_len + 1;
      model_sums(ftw_cfg[0], startc, fb_len, si, sq, tol);
      ea = $sqrt(si * si + sq * sq);
      ep = $atan2(sq, si) / (2.0 * PI);
      gp = real'($signed(dut.fb_phase)) / TWO32;
      dp = absr(gp - ep); if (dp > 0.5) dp = 1.0 - dp;
      checks++;
      if (absr(real'(dut.fb_amp) - ea) > 1.5 * tol + ea * 1e-4 + 2.0 || (ea > 1e5 && dp > 1e-3)) begin
        failures++;
        if (failures < 20) $display("feedback at %0d: amp %0d exp %f phase %f exp %f", cyc, dut.fb_amp, ea, gp, ep);
      end
      n_fb++;
    end
  end

  // DFT magnitude of the drive DAC at bin m of a window of n samples
  function automatic real drive_bin(input int start, input int n, input int m);
    real re, im, a;
    re = 0; im = 0;
    for (int i = 0; i < n; i++) begin
      a = 2.0 * PI * real'((longint'(m) * i) % n) / real'(n);
      re += real'(drv_rec[start + i]) * $cos(a);
      im += real'(drv_rec[start + i]) * $sin(a);
    end
    return $sqrt(re * re + im * im);
  endfunction

  // ---- the test --------------------------------------------------------------------
  int n_wa = 0, n_wb = 0, n_pure = 0, n_imd = 0, n_b2b = 0, n_td = 0;

  initial begin
    int lastc, lastc2;
    real mag [N_TONES];
    real ref_amp, spur, worst;
    int spur_bins [9] = '{0, 1, 746, 749, 1494, 1495, 1496, 2241, 2244};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- workload A: intermodulation AFM, N = 2^17 ----------------
    for (int k = 0; k < N_TONES; k++) begin
      int m;
      m = (k == 0) ? 747 : (k == 1) ? 748 : (k <= 16) ? 730 + k : 732 + k;  // 732..763
      ftw_cfg[k] = 32'(m) << 15;                       // m * 2^32 / 2^17
      wr(REG_FREQ0 + HOST_AW'(k), ftw_cfg[k]);
    end
    n_len = NA;
    wr(REG_WIN_LEN, NA);
    wr(REG_DRIVE, {16'h3000, 16'h3000});
    wr(REG_FB, {19'd0, 5'd0, 4'd0, 4'd10});               // 1024 updates per window
    wr(REG_FB_GAIN, {10'd0, 6'd30, 16'd300});
    wr(REG_BIAS, 32'd0);
    fb_on = 1;
    wr(REG_CTRL, 32'h1);
    @(posedge clk iff sums_irq);
    check_window("A", lastc, mag);
    fb_on = 0;
    n_wa++;
    // the cubic device puts its products at 2*747-748 = 746 (tone 16) and
    // 2*748-747 = 749 (tone 17); the edge bins 732 and 763 hold nothing
    begin
      real far;
      far = (mag[2] > mag[31]) ? mag[2] : mag[31];
      checks++;
      if (mag[16] > 100.0 * (far + 1.0) && mag[17] > 100.0 * (far + 1.0)) n_imd++;
      else begin failures++; $display("A: products %f %f far %f", mag[16], mag[17], far); end
    end
    // drive purity over the same window
    ref_amp = drive_bin(lastc - NA + 1, NA, 747);
    worst = -200.0;
    foreach (spur_bins[i]) begin
      spur = drive_bin(lastc - NA + 1, NA, spur_bins[i]);
      spur = 20.0 * $log10((spur + 1e-9) / ref_amp);
      if (spur > worst) worst = spur;
    end
    $display("A: worst drive spur %f dB below one tone", -worst);
    checks++;
    if (worst < -75.0) n_pure++; else begin failures++; $display("A: drive spur %f dB", worst); end
    checks++;
    if (n_fb < 1000) begin failures++; $display("A: only %0d feedback updates", n_fb); end
    wr(REG_CTRL, 32'h0);
    repeat (4) @(negedge clk);

    // ---------------- workload B: 1 kHz bandwidth, N = 61,400 ----------------
    c_run = -1;
    for (int k = 0; k < N_TONES; k++) begin
      int m;
      m = (k == 0) ? 289 : (k == 1) ? 290 : (k <= 10) ? 278 + k : 280 + k; // 280..311 kHz
      ftw_cfg[k] = 32'(longint'($floor(real'(m) * TWO32 / real'(NB) + 0.5)));
      wr(REG_FREQ0 + HOST_AW'(k), ftw_cfg[k]);
    end
    n_len = NB;
    wr(REG_WIN_LEN, NB);
    wr(REG_FB, {19'd0, 5'd0, 4'd0, 4'd0});
    wr(REG_CTRL, 32'h1);
    @(posedge clk iff sums_irq);
    check_window("B1", lastc, mag);
    n_wb++;
    @(posedge clk iff sums_irq);
    check_window("B2", lastc2, mag);
    n_wb++;
    checks++;
    if (lastc2 - lastc == NB) n_b2b++;
    else begin failures++; $display("B: windows %0d clocks apart", lastc2 - lastc); end
    // products at 2*289-290 = 288 kHz (tone 10) and 2*290-289 = 291 kHz
    // (tone 11); 300 kHz (tone 20) holds nothing
    checks++;
    if (mag[10] > 100.0 * (mag[20] + 1.0) && mag[11] > 100.0 * (mag[20] + 1.0)) n_imd++;
    else begin failures++; $display("B: products %f %f empty %f", mag[10], mag[11], mag[20]); end
    wr(REG_CTRL, 32'h0);

    // ---------------- workload C: time-domain stream of one beat ----------------
    for (int k = 0; k < 2; k++) begin
      ftw_cfg[k] = 32'(747 + k) << 15;
      wr(REG_FREQ0 + HOST_AW'(k), ftw_cfg[k]);
    end
    wr(REG_STATUS, 32'h1_0000);                           // clear the overflow flag
    begin
      int c0, j, blk, bad;
      logic [31:0] d;
      c0 = cyc;
      wr(REG_CTRL, 32'h3);                                // run, time-domain mode
      j = 0; bad = 0;
      while (j < NA / 16) begin
        rd(REG_STREAM, d);
        if (!d[31]) begin
          if (j == 0) while (!td_rec[c0]) c0++;     // first clock of the stream
          blk = 0;
          for (int s = 0; s < 16; s++) blk += adc_rec[c0 - 1 + 16 * j + s];
          checks++;
          if (int'($signed(d[15:0])) != blk) begin
            bad++; failures++;
            if (bad < 5) $display("C: word %0d got %0d exp %0d", j, $signed(d[15:0]), blk);
          end
          j++;
        end
      end
      if (bad == 0) n_td++; else $display("C: %0d words wrong", bad);
      rd(REG_STATUS, d);
      checks++;
      if (d[16]) begin failures++; $display("C: stream overflowed"); end
    end
    wr(REG_CTRL, 32'h0);

    $display("workload_A_windows=%0d feedback_updates=%0d workload_B_windows=%0d back_to_back=%0d imd_detected=%0d drive_pure=%0d stream_beats=%0d",
             n_wa, n_fb, n_wb, n_b2b, n_imd, n_pure, n_td);
    checks++; if (n_wa < 1)   begin failures++; $display("workload A not run"); end
    checks++; if (n_wb < 2)   begin failures++; $display("workload B not run"); end
    checks++; if (n_imd < 2)  begin failures++; $display("intermodulation not detected"); end
    checks++; if (n_pure < 1) begin failures++; $display("drive purity not checked"); end
    checks++; if (n_td < 1)   begin failures++; $display("stream beat not checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
