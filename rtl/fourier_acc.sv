// fourier_acc: integrate-and-dump of one I/Q product pair (one lockin channel).
//
// The paper computes its Fourier sums "by accumulating every sample during a
// period of time T"; Fig. 2 draws this step as a low-pass filter. Here the
// filter is an integrate-and-dump: every valid product is added to a running
// sum; the sample flagged `first` starts a new sum (the old partial sum is
// dropped, which is how a trigger restarts a measurement), and the sample
// flagged `last` closes the window: sum_i/sum_q then take the complete sum and
// sum_valid pulses for one clock. The sums are raw (not divided by the number
// of samples N); dividing by N gives V_x and V_y of the paper's Eq. 1-2.
//
// Timing: sum_i/sum_q/sum_valid appear one clock after the `last` product and
// hold until the next window closes. AW must cover PW + log2(longest window).
module fourier_acc
  import imla_pkg::*;
#(
  parameter int unsigned PW = PROD_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   first,
  input  logic                   last,
  input  logic signed [PW-1:0]   prod_i,
  input  logic signed [PW-1:0]   prod_q,
  output logic                   sum_valid,
  output logic signed [AW-1:0]   sum_i,
  output logic signed [AW-1:0]   sum_q
);
  logic signed [AW-1:0] acc_i, acc_q, nxt_i, nxt_q, ext_i, ext_q, base_i, base_q;

  always_comb begin
    ext_i  = prod_i;               // sign-extended
    ext_q  = prod_q;
    base_i = first ? '0 : acc_i;
    base_q = first ? '0 : acc_q;
    nxt_i  = base_i + ext_i;
    nxt_q  = base_q + ext_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_i     <= '0;
      acc_q     <= '0;
      sum_i     <= '0;
      sum_q     <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= 1'b0;
      if (in_valid) begin
        acc_i <= nxt_i;
        acc_q <= nxt_q;
        if (last) begin
          sum_i     <= nxt_i;
          sum_q     <= nxt_q;
          sum_valid <= 1'b1;
        end
      end
    end
  end
endmodule
