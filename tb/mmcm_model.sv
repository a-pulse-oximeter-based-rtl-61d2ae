// mmcm_model - behavioural model of the clock manager, for simulation only.
//
// Makes two 600 MHz clocks. clk_fixed has a fixed phase; clk_shift is the same
// clock delayed by phase * STEP_PS picoseconds, where phase is changed one step
// at a time through the dynamic phase-shift port, clocked by psclk: a one-cycle
// psen pulse with psincdec = 1 (later) or 0 (earlier) moves the phase one step,
// and psdone is pulsed for one psclk cycle DONE_CYCLES cycles after psen, as in
// the Xilinx MMCM. STEP_PS = 15 corresponds to 1/56 of a 1200 MHz VCO period.
module mmcm_model #(
  parameter int unsigned HALF_LO_PS  = 833,   // 833 + 834 = 1667 ps period
  parameter int unsigned HALF_HI_PS  = 834,
  parameter int unsigned STEP_PS     = 15,
  parameter int unsigned DONE_CYCLES = 12
) (
  input  logic psclk,
  input  logic psen,
  input  logic psincdec,
  output logic psdone,
  output logic clk_fixed,
  output logic clk_shift,
  output int   phase
);

  int unsigned base_ps = 2000;   // keeps the delay positive for negative phases
  int unsigned delay_ps;

  initial begin
    clk_fixed = 1'b0;
    clk_shift = 1'b0;
    psdone    = 1'b0;
    phase     = 0;
    forever begin
      #(HALF_LO_PS * 1ps) clk_fixed = 1'b1;
      #(HALF_HI_PS * 1ps) clk_fixed = 1'b0;
    end
  end

  assign delay_ps = base_ps + phase * STEP_PS;

  always @(clk_fixed) clk_shift <= #(delay_ps * 1ps) clk_fixed;

  int unsigned wait_cnt;
  logic        pending, dir;
  initial begin
    pending  = 1'b0;
    dir      = 1'b0;
    wait_cnt = 0;
  end

  always @(posedge psclk) begin
    psdone <= 1'b0;
    if (psen && !pending) begin
      pending  <= 1'b1;
      dir      <= psincdec;
      wait_cnt <= DONE_CYCLES - 1;
    end else if (pending) begin
      if (wait_cnt == 0) begin
        pending <= 1'b0;
        psdone  <= 1'b1;
        phase   <= dir ? phase + 1 : phase - 1;
      end else begin
        wait_cnt <= wait_cnt - 1;
      end
    end
  end

endmodule
