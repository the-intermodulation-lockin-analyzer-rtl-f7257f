// host_regs: register file between the host CPU and the lockin datapath.
//
// The paper's user sets the frequencies f_i, drive amplitudes A1/A2, feedback
// gain P and bias V_b over ethernet, through a CPU inside the FPGA (Fig. 2),
// and receives the Fourier sums or the time-domain stream. The CPU and its bus
// are not described, so this design gives it a plain synchronous register
// port: one write or read of a 32-bit word per clock. The map is in imla_pkg
// (REG_*): control and mode, window length, feedback divider and selection,
// A1/A2, P and its shift, V_b, 32 tuning words at REG_FREQ0 + k, and the 64
// Fourier sums at REG_SUM0 + {k, q, hi} (52-bit sums split into a low word and
// a sign-extended high word). A frame counter counts closed lockin windows;
// the host reads it before and after fetching the sums to see that they belong
// to one window. Reading REG_STREAM pops one time-domain sample.
//
// Timing: writes take effect at the clock edge; host_rdata is registered and
// valid one clock after host_re. Soft trigger, counter clear and stream pop are
// one-clock pulses.
module host_regs
  import imla_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // host port
  input  logic                        host_we,
  input  logic                        host_re,
  input  logic [HOST_AW-1:0]          host_addr,
  input  logic [HOST_DW-1:0]          host_wdata,
  output logic [HOST_DW-1:0]          host_rdata,
  // configuration
  output imla_cfg_t                   cfg,
  output logic [PHASE_W-1:0]          ftw [N_TONES],
  output logic                        soft_trig,
  output logic                        counter_clr,
  output logic                        stream_pop,
  output logic                        ovf_clr,
  // status and results
  input  logic                        sums_valid,
  input  logic signed [ACC_W-1:0]     sum_i [N_TONES],
  input  logic signed [ACC_W-1:0]     sum_q [N_TONES],
  input  logic [ACC_W-1:0]            fb_amp,
  input  logic [31:0]                 fb_phase,
  input  logic [31:0]                 counter_value,
  input  logic [TD_W-1:0]             stream_data,
  input  logic                        stream_empty,
  input  logic [14:0]                 stream_level,
  input  logic                        stream_overflow
);
  logic [15:0] frame_cnt;
  logic [HOST_DW-1:0] rd_c;
  logic [4:0] tone;
  logic signed [63:0] sel_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      cfg.win_len <= WIN_W'(1);
      for (int k = 0; k < N_TONES; k++) ftw[k] <= '0;
      soft_trig   <= 1'b0;
      counter_clr <= 1'b0;
      ovf_clr     <= 1'b0;
      frame_cnt   <= '0;
    end else begin
      soft_trig   <= 1'b0;
      counter_clr <= 1'b0;
      ovf_clr     <= 1'b0;
      if (sums_valid) frame_cnt <= frame_cnt + 16'd1;
      if (host_we) begin
        unique case (host_addr)
          REG_CTRL: begin
            cfg.run   <= host_wdata[0];
            cfg.mode  <= mode_e'(host_wdata[1]);
            soft_trig <= host_wdata[2];
          end
          REG_WIN_LEN: cfg.win_len <= host_wdata[WIN_W-1:0];
          REG_FB: begin
            cfg.fb_div <= host_wdata[FB_DIV_W-1:0];
            cfg.fb_sel <= host_wdata[8 +: $clog2(N_TONES)];
          end
          REG_DRIVE: begin
            cfg.a1 <= host_wdata[15:0];
            cfg.a2 <= host_wdata[31:16];
          end
          REG_FB_GAIN: begin
            cfg.p_gain  <= host_wdata[15:0];
            cfg.p_shift <= host_wdata[21:16];
          end
          REG_BIAS:    cfg.v_bias <= host_wdata[15:0];
          REG_COUNTER: counter_clr <= 1'b1;
          REG_STATUS:  ovf_clr <= host_wdata[16];
          default: begin
            if (host_addr[HOST_AW-1 -: 4] == REG_FREQ0[HOST_AW-1 -: 4])
              ftw[host_addr[4:0]] <= host_wdata;
          end
        endcase
      end
    end
  end

  // read decode
  always_comb begin
    tone       = host_addr[6:2];
    sel_sum    = host_addr[1] ? 64'(sum_q[tone]) : 64'(sum_i[tone]);
    stream_pop = host_re && (host_addr == REG_STREAM) && !stream_empty;
    rd_c       = '0;
    if (host_addr[HOST_AW-1] == 1'b1) begin            // REG_SUM0 region
      rd_c = host_addr[0] ? sel_sum[63:32] : sel_sum[31:0];
    end else if (host_addr[HOST_AW-1 -: 4] == REG_FREQ0[HOST_AW-1 -: 4]) begin
      rd_c = ftw[host_addr[4:0]];
    end else begin
      unique case (host_addr)
        REG_CTRL:     rd_c = {29'd0, 1'b0, cfg.mode, cfg.run};
        REG_WIN_LEN:  rd_c = 32'(cfg.win_len);
        REG_FB:       rd_c = {19'd0, cfg.fb_sel, 4'd0, cfg.fb_div};
        REG_DRIVE:    rd_c = {cfg.a2, cfg.a1};
        REG_FB_GAIN:  rd_c = {10'd0, cfg.p_shift, cfg.p_gain};
        REG_BIAS:     rd_c = 32'(cfg.v_bias);
        REG_STATUS:   rd_c = {stream_level, stream_overflow, frame_cnt};
        REG_COUNTER:  rd_c = counter_value;
        REG_STREAM:   rd_c = {stream_empty, 15'd0, 16'(stream_data)};
        REG_FB_AMP_L: rd_c = fb_amp[31:0];
        REG_FB_AMP_H: rd_c = 32'(fb_amp[ACC_W-1:32]);
        REG_FB_PHASE: rd_c = fb_phase;
        default:      rd_c = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       host_rdata <= '0;
    else if (host_re) host_rdata <= rd_c;
  end

  // a register access is either a read or a write
  assert property (@(posedge clk) disable iff (!rst_n) !(host_we && host_re));
endmodule
