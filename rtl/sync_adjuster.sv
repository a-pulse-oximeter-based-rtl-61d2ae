// sync_adjuster - laser synchronisation pulse derived from the 600 MHz clock.
//
// A counter runs through period clock cycles; the output is high for the first
// high cycles of each period, shifted later by delay cycles. Because the pulse
// is made from the same clock as the TDC, every laser shot has the same phase
// relative to the TDC period, which is what lets photon times pile up into a
// histogram. The defaults give the 4 MHz, 61 % duty (153 ns high) pulse of the
// prototype: 150 cycles per period, 92 high. Which settings the block lets the
// user adjust is not published; period, high time and a whole-cycle delay are
// this design's choice.
//
// Interface: clk, rst_n (synchronous, active low), period, high, delay (in
// clock cycles; delay values not below period act as 0), sync out (registered).
// Timing: the counter restarts from 0 one cycle after reset is released; sync
// is high in cycles where (count - delay) mod period < high, one cycle later.
module sync_adjuster #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] period,
  input  logic [W-1:0] high,
  input  logic [W-1:0] delay,
  output logic         sync
);

  logic [W-1:0] count;
  logic [W-1:0] dly;
  logic [W:0]   pos;

  assign dly = (delay < period) ? delay : '0;

  always_comb begin
    if (count >= dly) pos = {1'b0, count} - {1'b0, dly};
    else              pos = {1'b0, count} + {1'b0, period} - {1'b0, dly};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count <= '0;
      sync  <= 1'b0;
    end else begin
      count <= (count >= period - 1'b1) ? '0 : count + 1'b1;
      sync  <= pos < {1'b0, high};
    end
  end

endmodule
