// tb_tdl_carry_chain - checks the delay-line model: after a stop edge, the
// number of high taps must grow by about one per 1667/448 = 3.72 ps, always as
// a thermometer code (taps 0..n-1 high), cover all taps within one 1667 ps
// period, and a falling edge must travel the same way.
module tb_tdl_carry_chain;
  localparam int unsigned NUM_TAPS = 448;

  logic                stop;
  logic [NUM_TAPS-1:0] taps;
  int checks = 0, failures = 0;

  tdl_carry_chain dut (.stop(stop), .taps(taps));

  function automatic bit is_therm(input logic [NUM_TAPS-1:0] t, input bit ones_first);
    int n = $countones(t);
    for (int k = 0; k < NUM_TAPS; k++)
      if (t[k] != ((k < n) ? ones_first : !ones_first)) return 0;
    return 1;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(20ns);
    stop = 1'b0;
    #(5ns);
    check(taps == '0, "all taps low at rest");
    for (int dt = 50; dt <= 1600; dt += 77) begin
      int n, lo, hi;
      stop = 1'b0;
      #(3ns);
      stop = 1'b1;
      #(dt * 1ps);
      #(0.5ps);
      n  = $countones(taps);
      // ideal count dt*448/1667, give one tap of rounding either way
      lo = (dt * 448) / 1667 - 1;
      hi = (dt * 448) / 1667 + 1;
      check(n >= lo && n <= hi, $sformatf("dt=%0d ps: %0d taps high, expected %0d..%0d", dt, n, lo, hi));
      check(is_therm(taps, 1'b1), $sformatf("dt=%0d ps: not a thermometer code", dt));
      #(2ns);
      check(&taps, "all taps high one period after the edge");
      // falling edge
      stop = 1'b0;
      #(dt * 1ps);
      #(0.5ps);
      n = NUM_TAPS - $countones(taps);
      check(n >= lo && n <= hi, $sformatf("fall dt=%0d ps: %0d taps low", dt, n));
      check(is_therm(~taps, 1'b1), "falling edge not a thermometer code");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
