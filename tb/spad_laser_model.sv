// spad_laser_model - behavioural model of laser, tissue and SPAD, for simulation.
//
// On each rising edge of sync the laser fires after LASER_DELAY_PS. With
// probability detect_permille/1000 one photon of that shot is detected; its
// extra flight time through the tissue is offset_ps plus an exponentially
// distributed spread with mean spread_ps (a crude temporal point spread
// function), cut at 5 x spread_ps. The SPAD then gives a stop pulse of
// PULSE_PS and is blind for DEAD_PS (recovery time, about 20 ns for the sensor
// in the prototype); photons in that time are lost. Every detected photon is
// announced with its arrival time on det_time/det_stb for the testbench.
module spad_laser_model #(
  parameter int unsigned LASER_DELAY_PS = 20_000,
  parameter int unsigned PULSE_PS       = 5_000,
  parameter int unsigned DEAD_PS        = 20_000
) (
  input  logic sync,
  input  int   detect_permille,
  input  int   offset_ps,
  input  int   spread_ps,
  output logic stop,
  output logic det_stb,
  output realtime det_time
);

  realtime dead_until;

  initial begin
    stop       = 1'b0;
    det_stb    = 1'b0;
    det_time   = 0.0;
    dead_until = 0.0;
  end

  // Exponential spread, drawn as a geometric distribution in 1 ps steps.
  function automatic int expo_ps(input int mean_ps);
    int t;
    t = 0;
    if (mean_ps <= 0) return 0;
    while (t < 5 * mean_ps && ($urandom % mean_ps) != 0) t++;
    return t;
  endfunction

  task automatic shot();
    int flight;
    flight = offset_ps + expo_ps(spread_ps);
    #((LASER_DELAY_PS + flight) * 1ps);
    if ($realtime >= dead_until) begin
      dead_until = $realtime + DEAD_PS * 1ps;
      det_time   = $realtime;
      det_stb    = ~det_stb;
      stop       = 1'b1;
      #(PULSE_PS * 1ps) stop = 1'b0;
    end
  endtask

  always @(posedge sync) begin
    if (int'($urandom % 1000) < detect_permille) begin
      fork
        shot();
      join_none
    end
  end

endmodule
