// tdl_sampler - the flip-flop half of the tapped delay line.
//
// On every rising edge of the 600 MHz start clock the state of all carry-chain
// taps is captured. A photon that arrived t ps before the edge has driven the
// first t/3.7 taps high, so the captured word is a thermometer code of the
// time left in the period. The first rank catches the asynchronous taps; a
// second rank gives a metastable first-rank bit a full cycle to settle before
// the encoder uses it (a common TDL practice, not described by the prototype).
//
// Interface: clk, rst_n (synchronous, active low), taps (asynchronous in),
// therm (registered out). Latency: two clock edges from tap to therm.
module tdl_sampler #(
  parameter int unsigned NUM_TAPS = tof_pkg::NUM_TAPS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_TAPS-1:0] taps,
  output logic [NUM_TAPS-1:0] therm
);

  logic [NUM_TAPS-1:0] capture;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      capture <= '0;
      therm   <= '0;
    end else begin
      capture <= taps;
      therm   <= capture;
    end
  end

endmodule
