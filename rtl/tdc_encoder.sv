// tdc_encoder - turns sampled delay-line states into 37 histogram bin codes.
//
// A stop event is recognised in the sample where tap 0 is high and was low in
// the sample before (the rising SPAD edge has entered the chain during the last
// period). The number of high taps, n (1..448), is the time from the photon to
// the sampling edge in tap units, so the arrival time inside the period is
// NUM_TAPS - n taps. That time is folded into NUM_BINS bins of equal average
// width (1667 ps / 37 = 45 ps, as in the prototype):
//
//     code = floor((NUM_TAPS - n) * NUM_BINS / NUM_TAPS)      0 .. NUM_BINS-1
//
// so code 0 is an arrival just after the start edge and code 36 one just before
// the next. Ones are counted instead of searching for the 1-to-0 transition,
// which also tolerates bubbles. The count is split into GROUPS partial counts to
// keep each pipeline stage short at 600 MHz; the grouping, the event rule and
// the pipeline are this design's choices.
//
// Interface: clk, rst_n (synchronous, active low), therm[NUM_TAPS-1:0] in,
// code[CODE_W-1:0] and code_valid out. Latency: 3 clock cycles from the
// sample on therm to code_valid. Throughput: one event per cycle.
module tdc_encoder #(
  parameter int unsigned NUM_TAPS = tof_pkg::NUM_TAPS,
  parameter int unsigned NUM_BINS = tof_pkg::NUM_BINS,
  parameter int unsigned CODE_W   = tof_pkg::CODE_W,
  parameter int unsigned GROUPS   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_TAPS-1:0] therm,
  output logic [CODE_W-1:0]   code,
  output logic                code_valid
);

  localparam int unsigned GSIZE = (NUM_TAPS + GROUPS - 1) / GROUPS;
  localparam int unsigned GW    = $clog2(GSIZE + 1);
  localparam int unsigned NW    = $clog2(NUM_TAPS + 1);

  // The numerator can reach NUM_TAPS * NUM_BINS.
  localparam int unsigned PW    = $clog2(NUM_TAPS * NUM_BINS + 1);

  logic          tap0_prev;
  logic          s1_valid, s2_valid;
  logic [GW-1:0] s1_part [GROUPS];
  logic [NW-1:0] s2_ones;

  // Ones count of one group of taps.
  function automatic logic [GW-1:0] group_ones(input logic [NUM_TAPS-1:0] t, input int unsigned g);
    logic [GW-1:0] n;
    n = '0;
    for (int unsigned i = 0; i < GSIZE; i++)
      if (g * GSIZE + i < NUM_TAPS && t[g * GSIZE + i]) n = n + 1'b1;
    return n;
  endfunction

  // Stage 1: event detection and partial counts.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tap0_prev <= 1'b0;
      s1_valid  <= 1'b0;
      for (int unsigned g = 0; g < GROUPS; g++) s1_part[g] <= '0;
    end else begin
      tap0_prev <= therm[0];
      s1_valid  <= therm[0] && !tap0_prev;
      for (int unsigned g = 0; g < GROUPS; g++) s1_part[g] <= group_ones(therm, g);
    end
  end

  // Stage 2: total count.
  logic [NW-1:0] ones_sum;
  always_comb begin
    ones_sum = '0;
    for (int unsigned g = 0; g < GROUPS; g++) ones_sum = ones_sum + NW'(s1_part[g]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_ones  <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_ones  <= ones_sum;
    end
  end

  // Stage 3: fold the arrival time into NUM_BINS bins.
  logic [PW-1:0] scaled;
  logic [PW-1:0] bin;
  always_comb begin
    scaled = PW'(NUM_TAPS - 32'(s2_ones)) * PW'(NUM_BINS);
    bin    = scaled / PW'(NUM_TAPS);
    if (bin > PW'(NUM_BINS - 1)) bin = PW'(NUM_BINS - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code_valid <= 1'b0;
      code       <= '0;
    end else begin
      code_valid <= s2_valid;
      code       <= CODE_W'(bin);
    end
  end

  initial begin
    assert (NUM_BINS <= 2 ** CODE_W) else $error("NUM_BINS does not fit in CODE_W bits");
  end

endmodule
