// mixer: multiplies one ADC sample by the I and Q references of one frequency.
//
// The lockin measurement multiplies the response by two unit-amplitude copies
// of the reference, one shifted by pi/2 (paper, Eq. 1-2 and the red
// multipliers of Fig. 2). Here the sample is 12-bit signed and the references
// 16-bit signed, so each product is an exact 28-bit signed value. The window
// flags that travel with the sample (`first`, `last`, `fb_first`, `fb_last`)
// are delayed with it so the accumulators downstream see them on the same
// cycle as the product.
//
// Timing: one register stage; outputs belong to the inputs of the previous
// clock. Register placement and flag forwarding are this design's choice.
module mixer
  import imla_pkg::*;
#(
  parameter int unsigned XW = ADC_W,
  parameter int unsigned RW = REF_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [3:0]              in_flags,   // {fb_last, fb_first, last, first}
  input  logic signed [XW-1:0]    x,
  input  logic signed [RW-1:0]    ref_i,
  input  logic signed [RW-1:0]    ref_q,
  output logic                    out_valid,
  output logic [3:0]              out_flags,
  output logic signed [XW+RW-1:0] prod_i,
  output logic signed [XW+RW-1:0] prod_q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_flags <= '0;
      prod_i    <= '0;
      prod_q    <= '0;
    end else begin
      out_valid <= in_valid;
      out_flags <= in_valid ? in_flags : 4'b0;
      prod_i    <= x * ref_i;
      prod_q    <= x * ref_q;
    end
  end
endmodule
