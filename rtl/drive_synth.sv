// drive_synth: synthesis of the two-tone drive (first DAC channel).
//
// The paper's analyzer "synthesizes two user-defined drive tones"; Fig. 2
// multiplies two of the reference oscillators by the amplitudes A1 and A2 and
// adds them into the DAC. Here
//     dac = sat( (A1 * ref1 + A2 * ref2) >>> 15 )
// with A1, A2 signed Q1.15 and ref1, ref2 the 16-bit references (the design
// uses the in-phase, cosine, output of frequencies f1 and f2; the figure does
// not print which of I or Q is used). Because the drive comes from the same
// oscillators as the lockin references, drive and analysis are synchronous.
// While `en` is low the output is zero.
//
// Timing: one register stage from the references to `dac`.
module drive_synth
  import imla_pkg::*;
#(
  parameter int unsigned RW = REF_W,
  parameter int unsigned DW = DAC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic signed [RW-1:0]  ref1,
  input  logic signed [RW-1:0]  ref2,
  input  logic signed [DW-1:0]  a1,
  input  logic signed [DW-1:0]  a2,
  output logic signed [DW-1:0]  dac
);
  localparam int unsigned SW = RW + DW + 1;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << (DW-1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (DW-1));

  logic signed [SW-1:0] p1, p2, sum, scaled;

  always_comb begin
    p1     = ref1 * a1;
    p2     = ref2 * a2;
    sum    = p1 + p2;
    scaled = sum >>> (DW - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               dac <= '0;
    else if (!en)             dac <= '0;
    else if (scaled > MAXV)   dac <= MAXV[DW-1:0];
    else if (scaled < MINV)   dac <= MINV[DW-1:0];
    else                      dac <= scaled[DW-1:0];
  end
endmodule
