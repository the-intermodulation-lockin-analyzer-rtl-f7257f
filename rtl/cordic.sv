// cordic: amplitude and phase of one I/Q pair by the CORDIC algorithm.
//
// The paper computes amplitude |V| = sqrt(Vx^2 + Vy^2) and phase
// theta = atan(Vy/Vx) of one of the 32 frequencies with CORDIC (Volder) so that
// they can drive the real-time feedback (Fig. 2: inputs I, Q; outputs A, phi).
// This is a vectoring-mode CORDIC, one micro-rotation per clock: the vector is
// first folded into the right half plane (adding pi to the angle when x < 0),
// then ITERS rotations by +-atan(2^-i) drive y to zero while the angle is
// summed. The final x is K * |V|; it is multiplied by 1/K (0.16 fixed point)
// to give `amp`. `phase` is atan2(q, i) as a 32-bit fraction of a turn
// (2^32 = 2*pi, read as signed: -pi..pi).
//
// Timing: a `start` pulse while idle loads i/q at a clock edge; `done` pulses
// for one clock starting ITERS+1 clock edges after that one, with amp/phase, which hold until the next result. A `start` while busy
// is ignored (the next feedback window will start it again). The iterative
// (not pipelined) form is this design's choice: updates come at most once per
// feedback window, far slower than one per ITERS clocks for windows used in
// practice.
module cordic
  import imla_pkg::*;
#(
  parameter int unsigned IW    = ACC_W,        // input width (signed)
  parameter int unsigned ITERS = CORDIC_ITERS  // micro-rotations, <= 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [IW-1:0]  in_i,
  input  logic signed [IW-1:0]  in_q,
  output logic                  busy,
  output logic                  done,
  output logic [IW-1:0]         amp,     // unsigned magnitude
  output logic [31:0]           phase
);
  localparam int unsigned XW = IW + 2;   // room for the gain K < 1.65 and sqrt(2)
  localparam int unsigned CW = $clog2(ITERS + 1);

  logic signed [XW-1:0] x, y;
  logic [31:0]          z;
  logic [CW-1:0]        iter;
  logic signed [XW-1:0] ext_i, ext_q, xs, ys;
  logic [XW+15:0]       scaled;

  always_comb begin
    ext_i  = in_i;
    ext_q  = in_q;
    xs     = x >>> iter;
    ys     = y >>> iter;
    scaled = XW'(x) * (XW+16)'(CORDIC_KINV_Q16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x     <= '0;
      y     <= '0;
      z     <= '0;
      iter  <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      amp   <= '0;
      phase <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          iter <= '0;
          if (ext_i < 0) begin
            x <= -ext_i;
            y <= -ext_q;
            z <= 32'h8000_0000;
          end else begin
            x <= ext_i;
            y <= ext_q;
            z <= '0;
          end
        end
      end else if (iter == CW'(ITERS)) begin
        busy  <= 1'b0;
        done  <= 1'b1;
        amp   <= IW'(scaled >> 16);
        phase <= z;
      end else begin
        if (y >= 0) begin
          x <= x + ys;
          y <= y - xs;
          z <= z + ATAN_LUT[iter];
        end else begin
          x <= x - ys;
          y <= y + xs;
          z <= z - ATAN_LUT[iter];
        end
        iter <= iter + CW'(1);
      end
    end
  end
endmodule
