// imla_top: FPGA logic of the intermodulation lockin analyzer (ImLA).
//
// The analyzer drives a nonlinear device with two tones and measures its
// response at 32 frequencies at once, all integer multiples of one base
// frequency so that every intermodulation product has a defined phase. Per
// sample of the 12-bit ADC (61.4 MSa/s in the paper):
//   - 32 oscillators (nco) give cos/sin references of the user's frequencies,
//   - 32 mixers multiply the sample by both references (64 products),
//   - 32 integrate-and-dump accumulators (fourier_acc) form the 64 Fourier
//     sums over a window of N samples (measurement time T = N / fs),
//   - the products of one selected frequency are also summed over shorter
//     windows (N >> fb_div, update rate up to 1024/T) and converted by the
//     CORDIC into amplitude and phase; feedback_out turns the amplitude into
//     the second DAC channel, V_b + P * A,
//   - drive_synth makes the first DAC channel, A1 * f1 + A2 * f2,
//   - in time-domain mode the samples are also downsampled by 16 and queued in
//     stream_fifo for the host,
//   - the external trigger restarts the windows, the counter input is counted,
//     and a 10 MHz sync output is derived from the sample clock.
// The host CPU and its ethernet link are outside this module; they reach the
// design through the host register port (see imla_pkg for the map).
//
// Timing: every clock is one sample. Sample n of a window is adc_data at the
// n-th clock after the window starts; its reference phase is n * ftw (phases
// are zero while run is low). Window flags are delayed one clock to meet the
// registered references and ADC sample, the mixer adds one more; sums appear
// on the host port and `sums_irq` pulses three clocks after the last sample of
// a window was presented. The drive DAC lags its references by one clock.
//
// A few block outputs are left unread on purpose: the synchronised levels of
// the two digital inputs (only their edges are used), the window sample
// count, each oscillator's phase, the CORDIC busy flag and the FIFO
// empty/full flags (the host sees the FIFO through its level and the
// overflow flag instead). Lint lists them as unused signals.
module imla_top
  import imla_pkg::*;
#(
  parameter int unsigned NT             = N_TONES,
  parameter int unsigned FIFO_DEPTH     = 1024,
  parameter longint unsigned F_CLK_HZ   = 61_400_000,
  parameter longint unsigned F_SYNC_HZ  = 10_000_000
) (
  input  logic                     clk,            // sample clock
  input  logic                     rst_n,
  // converters
  input  logic signed [ADC_W-1:0]  adc_data,       // response of the device
  output logic signed [DAC_W-1:0]  dac_drive,      // two-tone drive
  output logic signed [DAC_W-1:0]  dac_feedback,   // V_b + P * A
  // digital I/O
  input  logic                     ext_trig_in,
  input  logic                     counter_trig_in,
  output logic                     sync_out,       // 10 MHz
  // host (CPU) register port
  input  logic                     host_we,
  input  logic                     host_re,
  input  logic [HOST_AW-1:0]       host_addr,
  input  logic [HOST_DW-1:0]       host_wdata,
  output logic [HOST_DW-1:0]       host_rdata,
  output logic                     sums_irq        // a lockin window closed
);
  localparam int unsigned SW = $clog2(N_TONES);

  imla_cfg_t          cfg;
  logic [PHASE_W-1:0] ftw_all [N_TONES];
  logic               soft_trig, counter_clr, stream_pop, ovf_clr;

  // ---- digital inputs -------------------------------------------------------
  logic ext_lvl, ext_pulse, cnt_lvl, cnt_pulse;
  logic [31:0] counter_value;

  trig_sync u_ext_sync (.clk, .rst_n, .async_in(ext_trig_in),
                        .level(ext_lvl), .pulse(ext_pulse));
  trig_sync u_cnt_sync (.clk, .rst_n, .async_in(counter_trig_in),
                        .level(cnt_lvl), .pulse(cnt_pulse));
  event_counter #(.W(32)) u_counter (.clk, .rst_n, .clr(counter_clr),
                        .event_pulse(cnt_pulse), .count(counter_value));

  // ---- windows --------------------------------------------------------------
  logic wc_valid, wc_first, wc_last, wc_fb_first, wc_fb_last;
  logic [WIN_W-1:0] wc_count;
  window_ctrl u_win (
    .clk, .rst_n, .run(cfg.run), .trig(ext_pulse | soft_trig),
    .win_len(cfg.win_len), .fb_div(cfg.fb_div),
    .valid(wc_valid), .first(wc_first), .last(wc_last),
    .fb_first(wc_fb_first), .fb_last(wc_fb_last), .count(wc_count));

  // align the flags and the ADC sample with the registered references
  logic                    s_valid;
  logic [3:0]              s_flags;
  logic signed [ADC_W-1:0] adc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_flags <= '0;
      adc_q   <= '0;
    end else begin
      s_valid <= wc_valid;
      s_flags <= {wc_fb_last, wc_fb_first, wc_last, wc_first};
      adc_q   <= adc_data;
    end
  end

  // ---- 32 references, mixers and Fourier sums ------------------------------
  ref_t                     ref_i [NT];
  ref_t                     ref_q [NT];
  logic signed [PROD_W-1:0] prod_i [NT];
  logic signed [PROD_W-1:0] prod_q [NT];
  logic                     m_valid [NT];
  logic [3:0]               m_flags [NT];
  logic                     s_sum_valid [NT];
  logic signed [ACC_W-1:0]  sum_i [N_TONES];
  logic signed [ACC_W-1:0]  sum_q [N_TONES];

  for (genvar k = 0; k < NT; k++) begin : g_ch
    logic [PHASE_W-1:0] phase_k;
    nco u_nco (.clk, .rst_n, .phase_clr(!cfg.run), .ftw(ftw_all[k]),
               .phase(phase_k), .ref_i(ref_i[k]), .ref_q(ref_q[k]));
    mixer u_mix (.clk, .rst_n, .in_valid(s_valid), .in_flags(s_flags),
                 .x(adc_q), .ref_i(ref_i[k]), .ref_q(ref_q[k]),
                 .out_valid(m_valid[k]), .out_flags(m_flags[k]),
                 .prod_i(prod_i[k]), .prod_q(prod_q[k]));
    fourier_acc u_acc (.clk, .rst_n, .in_valid(m_valid[k]),
                 .first(m_flags[k][0]), .last(m_flags[k][1]),
                 .prod_i(prod_i[k]), .prod_q(prod_q[k]),
                 .sum_valid(s_sum_valid[k]), .sum_i(sum_i[k]), .sum_q(sum_q[k]));
  end
  for (genvar k = NT; k < N_TONES; k++) begin : g_unused
    assign sum_i[k] = '0;
    assign sum_q[k] = '0;
  end

  // ---- feedback frequency: short windows, CORDIC, output -------------------
  logic [SW-1:0]            fb_idx;
  logic signed [PROD_W-1:0] fb_pi, fb_pq;
  logic                     fb_sum_valid, cordic_busy, cordic_done;
  logic signed [ACC_W-1:0]  fb_si, fb_sq;
  logic [ACC_W-1:0]         fb_amp;
  logic [31:0]              fb_phase;

  always_comb begin
    fb_idx = (32'(cfg.fb_sel) < NT) ? cfg.fb_sel : '0;
    fb_pi  = prod_i[fb_idx];
    fb_pq  = prod_q[fb_idx];
  end

  fourier_acc u_fb_acc (.clk, .rst_n, .in_valid(m_valid[0]),
                 .first(m_flags[0][2]), .last(m_flags[0][3]),
                 .prod_i(fb_pi), .prod_q(fb_pq),
                 .sum_valid(fb_sum_valid), .sum_i(fb_si), .sum_q(fb_sq));

  cordic u_cordic (.clk, .rst_n, .start(fb_sum_valid), .in_i(fb_si), .in_q(fb_sq),
                   .busy(cordic_busy), .done(cordic_done),
                   .amp(fb_amp), .phase(fb_phase));

  feedback_out u_fb_out (.clk, .rst_n, .amp_valid(cordic_done), .amp(fb_amp),
                   .p_gain(cfg.p_gain), .p_shift(cfg.p_shift), .v_bias(cfg.v_bias),
                   .dac(dac_feedback));

  // ---- drive ----------------------------------------------------------------
  drive_synth u_drive (.clk, .rst_n, .en(cfg.run),
                   .ref1(ref_i[0]), .ref2(ref_i[(NT > 1) ? 1 : 0]),
                   .a1(cfg.a1), .a2(cfg.a2), .dac(dac_drive));

  // ---- time-domain mode -----------------------------------------------------
  logic                   td_mode, td_valid, st_empty, st_full, st_ovf;
  logic signed [TD_W-1:0] td_y;
  logic [TD_W-1:0]        st_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] st_level;

  assign td_mode = cfg.run && (cfg.mode == MODE_TIME);

  td_decimator u_decim (.clk, .rst_n, .clr(!td_mode), .in_valid(td_mode),
                   .x(adc_q), .out_valid(td_valid), .y(td_y));

  stream_fifo #(.W(TD_W), .DEPTH(FIFO_DEPTH)) u_stream (
                   .clk, .rst_n, .wr_en(td_valid), .wr_data(td_y),
                   .rd_en(stream_pop), .rd_data(st_data), .empty(st_empty),
                   .full(st_full), .level(st_level), .overflow(st_ovf),
                   .ovf_clr(ovf_clr));

  // ---- sync output ------------------------------------------------------------
  sync_clk_gen #(.F_CLK_HZ(F_CLK_HZ), .F_OUT_HZ(F_SYNC_HZ)) u_sync (
                   .clk, .rst_n, .clk_out(sync_out));

  // ---- host registers ---------------------------------------------------------
  assign sums_irq = s_sum_valid[0];

  host_regs u_regs (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata,
    .cfg, .ftw(ftw_all), .soft_trig, .counter_clr, .stream_pop, .ovf_clr,
    .sums_valid(s_sum_valid[0]), .sum_i, .sum_q, .fb_amp, .fb_phase,
    .counter_value, .stream_data(st_data), .stream_empty(st_empty),
    .stream_level(15'(st_level)), .stream_overflow(st_ovf));

endmodule
