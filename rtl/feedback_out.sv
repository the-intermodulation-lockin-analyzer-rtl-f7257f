// feedback_out: the feedback output channel (second DAC channel).
//
// Fig. 2 of the paper feeds the CORDIC amplitude A through a multiplier with
// the feedback gain P and an adder with the bias V_b to the second DAC
// channel; the paper lets the user set P and V_b over ethernet. This block
// computes
//     dac = sat( V_b + ((P * A) >>> p_shift) )
// with P a signed 16-bit gain, A the unsigned amplitude from the CORDIC and a
// power-of-two shift that scales the raw (not divided by N) amplitude into DAC
// codes; the shift and the saturation to the 16-bit DAC range are this
// design's choices. The paper shows only proportional gain, so no integrator
// is added.
//
// Timing: the product term is registered when `amp_valid` pulses and held
// between updates; `dac` is registered and follows changes of V_b one clock
// later.
module feedback_out
  import imla_pkg::*;
#(
  parameter int unsigned AW = ACC_W,
  parameter int unsigned DW = DAC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  amp_valid,
  input  logic [AW-1:0]         amp,
  input  logic signed [DW-1:0]  p_gain,
  input  logic [5:0]            p_shift,
  input  logic signed [DW-1:0]  v_bias,
  output logic signed [DW-1:0]  dac
);
  localparam int unsigned PRW = AW + 1 + DW;
  localparam logic signed [DW+1:0] MAXV = (DW+2)'((1 << (DW-1)) - 1);
  localparam logic signed [DW+1:0] MINV = -(DW+2)'(1 << (DW-1));
  // the term is clamped to +-2^DW: beyond that the final sum saturates
  // anyway, whatever V_b is, so the result equals sat(V_b + P*A >>> shift)
  localparam logic signed [DW+1:0] MAXT = (DW+2)'(1 << DW);
  localparam logic signed [DW+1:0] MINT = -(DW+2)'(1 << DW);

  logic signed [PRW-1:0] prod, shifted;
  logic signed [DW+1:0]  term_c, term, total;

  always_comb begin
    prod    = $signed({1'b0, amp}) * p_gain;
    shifted = prod >>> p_shift;
    if (shifted > PRW'(MAXT))      term_c = MAXT;
    else if (shifted < PRW'(MINT)) term_c = MINT;
    else                           term_c = (DW+2)'(shifted);
    total = term + (DW+2)'(v_bias);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      term <= '0;
      dac  <= '0;
    end else begin
      if (amp_valid) term <= term_c;
      if (total > MAXV)      dac <= MAXV[DW-1:0];
      else if (total < MINV) dac <= MINV[DW-1:0];
      else                   dac <= total[DW-1:0];
    end
  end
endmodule
