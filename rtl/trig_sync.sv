// trig_sync: synchroniser and rising-edge detector for an external input.
//
// The analyzer's external trigger input and counter trigger input (Fig. 2 of
// the paper) come from other instruments, asynchronous to the sample clock.
// Two flip-flops bring the level into the clock domain and a third keeps the
// previous level, so `pulse` is high for exactly one clock per rising edge of
// the input. The synchroniser depth is this design's choice.
//
// Timing: `pulse` rises 3 clocks after the input edge is first sampled.
module trig_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic async_in,
  output logic level,
  output logic pulse
);
  logic s1, s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= 1'b0;
      s2    <= 1'b0;
      level <= 1'b0;
      pulse <= 1'b0;
    end else begin
      s1    <= async_in;
      s2    <= s1;
      level <= s2;
      pulse <= s2 && !level;
    end
  end
endmodule
