// frame_rate_control - marks the start and stop of every histogram frame.
//
// While run is high, frames of frame_cycles clock cycles follow each other with
// no gap: frame_start is high in the first cycle of a frame and frame_stop in
// its last. At 600 MHz the default frame length of 12,000,000 cycles gives the
// 50 frames/s of the prototype. When run falls, the frame in progress is
// completed and no new one starts (this design's choice). frame_cycles is
// sampled at the start of each frame; values below 2 are treated as 2.
//
// Interface: clk, rst_n (synchronous, active low), run, frame_cycles in;
// frame_start, frame_stop, active out (active covers every cycle of a frame).
module frame_rate_control #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic [CNT_W-1:0] frame_cycles,
  output logic             frame_start,
  output logic             frame_stop,
  output logic             active
);

  logic [CNT_W-1:0] remaining;   // cycles left in the frame, after this one

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active    <= 1'b0;
      remaining <= '0;
    end else if (!active || remaining == '0) begin
      active    <= run;
      remaining <= (frame_cycles < CNT_W'(2)) ? CNT_W'(1) : frame_cycles - 1'b1;
    end else begin
      remaining <= remaining - 1'b1;
    end
  end

  // frame_start follows the cycle in which a new frame was armed.
  logic starting;
  always_ff @(posedge clk) begin
    if (!rst_n) starting <= 1'b0;
    else        starting <= (!active || remaining == '0) && run;
  end

  assign frame_start = starting;
  assign frame_stop  = active && remaining == '0;

endmodule
