// imla_pkg: widths, constants, types and the reference sine table shared by
// the intermodulation lockin analyzer (ImLA).
//
// The converter widths (12-bit ADC, 16-bit DAC), the number of reference
// frequencies (32) and the sample rate (61.4 MSa/s) follow the paper. All other
// widths are choices of this design:
//   - phases are 32-bit fractions of a full turn (2^32 = 2*pi),
//   - the reference sine table has 1024 entries of 16-bit signed amplitude,
//   - a lockin window holds up to 2^24 - 1 samples, so a Fourier sum needs
//     12 + 16 + 24 = 52 bits and never overflows.
// The sine table is computed at elaboration with an integer CORDIC in rotation
// mode, using the arctangent table ATAN_LUT (atan(2^-i) / (2*pi) * 2^32), so no
// table file and no real arithmetic is needed.
package imla_pkg;

  // ---- converter and sizing constants -------------------------------------
  localparam int unsigned ADC_W     = 12;   // A/D input width (paper)
  localparam int unsigned DAC_W     = 16;   // D/A output width (paper)
  localparam int unsigned N_TONES   = 32;   // reference frequencies (paper)
  localparam int unsigned REF_W     = 16;   // reference sine/cosine width
  localparam int unsigned PHASE_W   = 32;   // phase accumulator width
  localparam int unsigned LUT_AW    = 10;   // sine table address width
  localparam int unsigned WIN_W     = 24;   // window length counter width
  localparam int unsigned PROD_W    = ADC_W + REF_W;           // 28
  localparam int unsigned ACC_W     = PROD_W + WIN_W;          // 52
  localparam int unsigned FB_DIV_W  = 4;    // feedback divider exponent, 0..10
  localparam int unsigned FB_DIV_MAX_LOG2 = 10; // update rate up to 1024/T (paper)
  localparam int unsigned TD_DECIM  = 16;   // time-domain downsampling factor
  localparam int unsigned TD_W      = ADC_W + $clog2(TD_DECIM); // 16
  localparam int unsigned HOST_AW   = 9;    // host register word address
  localparam int unsigned HOST_DW   = 32;   // host register data width

  localparam int signed   REF_AMP   = 32767; // peak reference amplitude

  // ---- CORDIC arctangent table --------------------------------------------
  localparam int unsigned CORDIC_ITERS = 30;
  typedef logic [31:0] angle_t;
  localparam angle_t ATAN_LUT [32] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81,
    32'd41,        32'd20,        32'd10,        32'd5,
    32'd3,         32'd1,         32'd1,         32'd0};
  // 1/K of the CORDIC gain, K = prod sqrt(1 + 2^-2i), as 0.16 and 0.32 fixed point
  localparam int unsigned CORDIC_KINV_Q16 = 39797;
  localparam longint unsigned CORDIC_KINV_Q32 = 64'd2608131496;

  // ---- sine table ----------------------------------------------------------
  typedef logic signed [REF_W-1:0] ref_t;

  // sin(2*pi*idx/2^LUT_AW) * REF_AMP, rounded, by CORDIC rotation.
  function automatic ref_t sin_entry(int unsigned idx);
    longint signed x, y, xn, yn;
    longint signed z;          // remaining angle, 2^32 = full turn
    longint signed target;
    int unsigned   quadrant;
    longint signed res;
    longint signed amp_l;
    amp_l = longint'(REF_AMP);
    quadrant = idx >> (LUT_AW - 2);
    // angle inside the quadrant, in 32-bit turn units
    target = longint'(idx % (32'd1 << (LUT_AW - 2))) <<< (PHASE_W - LUT_AW);
    // start at x = REF_AMP/K in 2^16 scaled units
    x = (amp_l * longint'(CORDIC_KINV_Q32)) >>> 16;
    y = 0;
    z = target;
    for (int i = 0; i < CORDIC_ITERS; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        z  = z - longint'(ATAN_LUT[i]);
      end else begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        z  = z + longint'(ATAN_LUT[i]);
      end
      x = xn;
      y = yn;
    end
    // x = cos, y = sin of the in-quadrant angle, scaled by 2^16
    case (quadrant)
      0:       res = y;
      1:       res = x;
      2:       res = -y;
      default: res = -x;
    endcase
    res = (res + 64'sd32768) >>> 16;
    if (res > amp_l)  res = amp_l;
    if (res < -amp_l) res = -amp_l;
    return ref_t'(res);
  endfunction

  typedef ref_t sin_lut_t [1 << LUT_AW];

  function automatic sin_lut_t make_sin_lut();
    sin_lut_t t;
    for (int unsigned k = 0; k < (1 << LUT_AW); k++) t[k] = sin_entry(k);
    return t;
  endfunction

  localparam sin_lut_t SIN_LUT = make_sin_lut();

  // ---- run-time configuration written by the host -------------------------
  typedef enum logic {
    MODE_LOCKIN = 1'b0,   // Fourier sums sent to the host
    MODE_TIME   = 1'b1    // downsampled response streamed to the host
  } mode_e;

  typedef struct packed {
    logic                         run;       // 0: phases held at zero, sums stopped
    mode_e                        mode;
    logic [WIN_W-1:0]             win_len;   // samples per lockin window, N = T*fs
    logic [FB_DIV_W-1:0]          fb_div;    // feedback window = N >> fb_div
    logic [$clog2(N_TONES)-1:0]   fb_sel;    // frequency fed to the CORDIC
    logic signed [DAC_W-1:0]      a1;        // drive amplitude of f1, Q1.15
    logic signed [DAC_W-1:0]      a2;        // drive amplitude of f2, Q1.15
    logic signed [DAC_W-1:0]      p_gain;    // feedback gain P
    logic [5:0]                   p_shift;   // right shift after P * A
    logic signed [DAC_W-1:0]      v_bias;    // feedback bias V_b
  } imla_cfg_t;

  // ---- host register map (word addresses) ---------------------------------
  localparam logic [HOST_AW-1:0] REG_CTRL     = 9'h000; // [0] run [1] mode [2] soft trigger (self-clearing)
  localparam logic [HOST_AW-1:0] REG_WIN_LEN  = 9'h001;
  localparam logic [HOST_AW-1:0] REG_FB       = 9'h002; // [3:0] fb_div [12:8] fb_sel
  localparam logic [HOST_AW-1:0] REG_DRIVE    = 9'h003; // [15:0] a1 [31:16] a2
  localparam logic [HOST_AW-1:0] REG_FB_GAIN  = 9'h004; // [15:0] P [21:16] shift
  localparam logic [HOST_AW-1:0] REG_BIAS     = 9'h005; // [15:0] V_b
  localparam logic [HOST_AW-1:0] REG_STATUS   = 9'h006; // [15:0] frame count [16] stream overflow [31:17] stream level
  localparam logic [HOST_AW-1:0] REG_COUNTER  = 9'h007; // event counter, write clears
  localparam logic [HOST_AW-1:0] REG_STREAM   = 9'h008; // read pops one time-domain sample
  localparam logic [HOST_AW-1:0] REG_FB_AMP_L = 9'h009;
  localparam logic [HOST_AW-1:0] REG_FB_AMP_H = 9'h00A;
  localparam logic [HOST_AW-1:0] REG_FB_PHASE = 9'h00B;
  localparam logic [HOST_AW-1:0] REG_FREQ0    = 9'h040; // 0x040..0x05F tuning words
  localparam logic [HOST_AW-1:0] REG_SUM0     = 9'h100; // 0x100..0x17F: 0x100 + 4*tone + 2*q + hi

endpackage
