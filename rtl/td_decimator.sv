// td_decimator: downsampler of the time-domain mode.
//
// In time-domain mode the paper streams the response "continuously downsampled
// to 3.9 MSa/s". At 61.4 MSa/s the nearest integer factor is 16
// (61.4 / 16 = 3.84 MSa/s), which this design uses. The filter is the simplest
// one that does the job: a boxcar (sum of D consecutive samples, then dump),
// kept at full precision, ADC_W + log2(D) bits, so no information is lost to
// rounding. The paper does not describe its decimation filter.
//
// Timing: every D-th valid input sample closes a block; one clock later
// out_valid pulses with the block sum. `clr` restarts the block count.
module td_decimator
  import imla_pkg::*;
#(
  parameter int unsigned XW = ADC_W,
  parameter int unsigned D  = TD_DECIM,
  parameter int unsigned YW = XW + $clog2(D)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  in_valid,
  input  logic signed [XW-1:0]  x,
  output logic                  out_valid,
  output logic signed [YW-1:0]  y
);
  localparam int unsigned CW = (D > 1) ? $clog2(D) : 1;

  logic [CW-1:0]        cnt;
  logic signed [YW-1:0] acc, nxt, xe;

  always_comb begin
    xe  = x;
    nxt = ((cnt == '0) ? YW'(0) : acc) + xe;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      acc       <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (clr) begin
        cnt <= '0;
      end else if (in_valid) begin
        acc <= nxt;
        if (cnt == CW'(D - 1)) begin
          cnt       <= '0;
          y         <= nxt;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end
endmodule
