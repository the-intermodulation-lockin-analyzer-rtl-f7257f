// window_ctrl: sample-window sequencer of the lockin analyzer.
//
// A lockin window is N = win_len samples long, the measurement time T of the
// paper (bandwidth 1/T). The feedback frequency is integrated over shorter
// windows of N >> fb_div samples, so its update rate can be chosen as 2^k / T
// for k = 0..10, i.e. "up to 1024/T" as the paper states; feedback windows are
// aligned to the start of each lockin window, and the last one is cut short
// when N is not a multiple of the feedback window. A pulse on `trig` (external
// trigger or host) restarts both windows: the next sample is the first of a new
// window and the partial sums are dropped ("reset the calculation of the
// Fourier sums, effectively defining the start of measurement").
//
// Interface/timing: while `run` is high every clock is one sample slot and
// `valid` is high; first/last/fb_first/fb_last describe the slot of this clock
// (decoded from registered counters). While `run` is low the counters are held
// at zero, so the first slot after `run` rises is the first of a window.
// win_len = 0 is treated as 1. The power-of-two feedback divider is this
// design's reading of "selected up to 1024/T".
module window_ctrl
  import imla_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  input  logic                 trig,
  input  logic [WIN_W-1:0]     win_len,
  input  logic [FB_DIV_W-1:0]  fb_div,
  output logic                 valid,
  output logic                 first,
  output logic                 last,
  output logic                 fb_first,
  output logic                 fb_last,
  output logic [WIN_W-1:0]     count      // index of this slot in its window
);
  logic [WIN_W-1:0] n_eff, fb_len, fb_cnt;
  logic [FB_DIV_W-1:0] div_c;
  logic end_win, end_fb;

  always_comb begin
    n_eff  = (win_len == '0) ? WIN_W'(1) : win_len;
    div_c  = (fb_div > FB_DIV_W'(FB_DIV_MAX_LOG2)) ? FB_DIV_W'(FB_DIV_MAX_LOG2) : fb_div;
    fb_len = n_eff >> div_c;
    if (fb_len == '0) fb_len = WIN_W'(1);
    end_win  = (count == n_eff - WIN_W'(1));
    end_fb   = end_win || (fb_cnt == fb_len - WIN_W'(1));
    valid    = run;
    first    = run && (count == '0);
    last     = run && end_win;
    fb_first = run && (fb_cnt == '0);
    fb_last  = run && end_fb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count  <= '0;
      fb_cnt <= '0;
    end else if (!run || trig) begin
      count  <= '0;
      fb_cnt <= '0;
    end else begin
      count  <= end_win ? '0 : count + WIN_W'(1);
      fb_cnt <= end_fb  ? '0 : fb_cnt + WIN_W'(1);
    end
  end
endmodule
