// event_counter: the "counter" block on the Counter Trig. In input.
//
// Fig. 2 of the paper shows a counter fed by the Counter Trig. In connector and
// read by the CPU; the text does not describe it further. This design counts
// rising edges (one-clock pulses from trig_sync) in a W-bit register that the
// host reads and clears, e.g. to number the pixels of a scan line. A clear and
// an event in the same clock give a count of 1. The counter wraps at 2^W.
//
// Timing: `count` includes a pulse one clock after it.
module event_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         event_pulse,
  output logic [W-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= W'(event_pulse);
    else if (event_pulse) count <= count + W'(1);
  end
endmodule
