// nco: one reference frequency of the lockin analyzer.
//
// A PHASE_W-bit phase accumulator advances by the tuning word `ftw` every
// sample; the top LUT_AW bits of the phase address the shared sine table and
// give the in-phase reference ref_i = cos(phase) and the quadrature reference
// ref_q = sin(phase). The next FW phase bits refine the result by a first-order
// Taylor step, sin(a + d) ~ sin(a) + d*cos(a) and cos(a + d) ~ cos(a) -
// d*sin(a): a bare 1024-entry table truncates the phase to 10 bits, which
// leaves spurs near -60 dBc, while the corrected output stays within about
// 2 LSB of the ideal 16-bit value (spurs below -85 dBc), which keeps the
// references and the drive clean of the distortion the analyzer is meant to
// measure. The output frequency is f = ftw / 2^PHASE_W * fs. The
// paper asks that every frequency be an integer multiple of a base frequency
// (delta omega); this holds when the host writes tuning words k * ftw_base.
// All oscillators share the sample clock and are zeroed together while
// `phase_clr` is high, so their relative phases are defined.
//
// Timing: `phase` is a register; ref_i/ref_q are registered table reads of the
// phase that was present one clock earlier (latency 1 from phase to outputs).
// The accumulator, table size and amplitude are this design's choice; the
// paper gives only the function (I and Q outputs per frequency, Fig. 2).
module nco
  import imla_pkg::*;
#(
  parameter int unsigned PW  = PHASE_W,
  parameter int unsigned AW  = LUT_AW,
  parameter int unsigned FW  = 12        // phase bits used for the correction
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 phase_clr,   // hold the phase at zero
  input  logic [PW-1:0]        ftw,         // frequency tuning word
  output logic [PW-1:0]        phase,       // current phase (turns * 2^PW)
  output ref_t                 ref_i,       // cos
  output ref_t                 ref_q        // sin
);
  localparam int unsigned QUARTER = 1 << (AW - 2);
  // 2*pi in 0.13 fixed point: d = frac * 2*pi / 2^(AW+FW) radians
  localparam int unsigned TWO_PI_Q13 = 51472;
  localparam int unsigned SH = AW + FW + 13;
  localparam int unsigned MW = REF_W + FW + 18;

  logic [AW-1:0]        addr_s, addr_c;
  logic [FW-1:0]        frac;
  ref_t                 s0, c0;
  logic signed [MW-1:0] s_ext, c_ext, fr_ext, ds, dc, s1, c1;
  localparam logic signed [MW-1:0] K_EXT = MW'(TWO_PI_Q13);
  localparam logic signed [MW-1:0] RND   = MW'(1) <<< (SH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          phase <= '0;
    else if (phase_clr)  phase <= '0;
    else                 phase <= phase + ftw;
  end

  function automatic ref_t clip(input logic signed [MW-1:0] v);
    if (v > MW'(REF_AMP))       return ref_t'(REF_AMP);
    else if (v < -MW'(REF_AMP)) return ref_t'(-REF_AMP);
    else                        return ref_t'(v);
  endfunction

  always_comb begin
    addr_s = phase[PW-1 -: AW];
    addr_c = addr_s + AW'(QUARTER);   // cos(x) = sin(x + pi/2)
    frac   = phase[PW-AW-1 -: FW];
    s0     = SIN_LUT[addr_s];
    c0     = SIN_LUT[addr_c];
    // d * cos and d * sin, rounded, in LSB of the reference
    s_ext  = MW'(s0);                 // sign-extended table values
    c_ext  = MW'(c0);
    fr_ext = MW'(frac);               // zero-extended, non-negative
    ds = (c_ext * fr_ext * K_EXT + RND) >>> SH;
    dc = (s_ext * fr_ext * K_EXT + RND) >>> SH;
    s1 = s_ext + ds;
    c1 = c_ext - dc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_i <= '0;
      ref_q <= '0;
    end else begin
      ref_i <= clip(c1);
      ref_q <= clip(s1);
    end
  end
endmodule
