// tdl_carry_chain - behavioural model of the delay line of the TDC.
//
// Behavioural model, not synthesizable logic. In the FPGA the delay line is a
// chain of carry primitives: the stop edge from the SPAD ripples through it and
// every carry output is a tap. The real tap delays are set by the silicon and
// placement, so they cannot be written as RTL. This model gives tap k a total
// delay of round((k+1)*RANGE_PS/NUM_TAPS) ps from the stop input, so 448 taps
// cover one 1667 ps period of the start clock, as in the prototype. Tap delays
// are whole picoseconds (time literals, so the model does not depend on the
// time unit); the 1 ps rounding gives a small, deterministic non-linearity.
//
// Interface: stop (input), taps[NUM_TAPS-1:0] (output, tap 0 nearest the
// input). No clock: the taps are sampled by tdl_sampler.
module tdl_carry_chain #(
  parameter int unsigned NUM_TAPS = tof_pkg::NUM_TAPS,
  parameter int unsigned RANGE_PS = 1667
) (
  input  logic                stop,
  output logic [NUM_TAPS-1:0] taps
);

  initial taps = '0;

  for (genvar k = 0; k < NUM_TAPS; k++) begin : g_tap
    localparam int unsigned DELAY_PS = ((k + 1) * RANGE_PS + NUM_TAPS / 2) / NUM_TAPS;
    always @(stop) taps[k] <= #(DELAY_PS * 1ps) stop;
  end

endmodule
