// sync_clk_gen: the 10 MHz synchronisation output.
//
// The paper gives the analyzer a "10 MHz clock OUT signal" so that other
// instruments can lock to its master clock. It does not say how the signal is
// made. Here it is derived from the sample clock by a 32-bit phase accumulator
// (direct digital synthesis): each clock the accumulator advances by
// INC = round(F_OUT_HZ / F_CLK_HZ * 2^32) and its top bit is the output. The
// mean frequency is F_OUT_HZ to within F_CLK_HZ / 2^32, locked to the master
// clock, with edges on sample-clock edges (jitter up to one sample period); a
// real instrument would clean it with a PLL, which is outside this logic.
//
// Timing: the output is a registered square wave, 50 % duty cycle on average.
module sync_clk_gen #(
  parameter longint unsigned F_CLK_HZ = 61_400_000,
  parameter longint unsigned F_OUT_HZ = 10_000_000
) (
  input  logic clk,
  input  logic rst_n,
  output logic clk_out
);
  localparam logic [31:0] INC = 32'(((F_OUT_HZ << 32) + F_CLK_HZ / 2) / F_CLK_HZ);

  logic [31:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      clk_out <= 1'b0;
    end else begin
      acc     <= acc + INC;
      clk_out <= acc[31];
    end
  end
endmodule
