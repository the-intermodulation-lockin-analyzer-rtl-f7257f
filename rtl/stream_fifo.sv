// stream_fifo: buffer for the gap-free time-domain stream.
//
// The paper streams the downsampled response "over ethernet without gaps in
// the data". The host side (CPU and ethernet) reads in bursts, so the samples
// are held in a synchronous first-in first-out buffer of DEPTH words. If the
// host falls behind and a sample arrives while the buffer is full, the sample
// is dropped and the sticky `overflow` flag is set until `ovf_clr`, so a gap
// is never silent. Depth and overflow policy are this design's choices.
//
// Interface/timing: first-word-fall-through; rd_data shows the oldest word
// whenever `empty` is low, and `rd_en` removes it at the clock edge. A write
// and a read in the same clock are both accepted (also when full). `level` is
// the number of stored words.
module stream_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       overflow,
  input  logic                       ovf_clr
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  always_comb begin
    empty   = (level == '0);
    full    = (level == LW'(DEPTH));
    do_rd   = rd_en && !empty;
    do_wr   = wr_en && (!full || do_rd);
    rd_data = mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      level    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + AW'(1);
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + AW'(1);
      level <= level + LW'(do_wr) - LW'(do_rd);
      if (ovf_clr)               overflow <= 1'b0;
      else if (wr_en && !do_wr)  overflow <= 1'b1;
    end
  end

  // the stored count never exceeds the depth
  assert property (@(posedge clk) disable iff (!rst_n) level <= LW'(DEPTH));
endmodule
