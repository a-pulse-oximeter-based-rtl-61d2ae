// tb_tdl_sampler - random tap words must appear on therm exactly two clock
// edges later; reset must clear both ranks.
module tb_tdl_sampler;
  localparam int unsigned NUM_TAPS = 448;

  logic clk = 1'b0, rst_n;
  logic [NUM_TAPS-1:0] taps, therm;
  logic [NUM_TAPS-1:0] hist [$];
  int checks = 0, failures = 0;

  tdl_sampler dut (.clk, .rst_n, .taps, .therm);

  always #(833ps) clk = ~clk;

  function automatic logic [NUM_TAPS-1:0] rand_word();
    logic [NUM_TAPS-1:0] w;
    for (int i = 0; i < NUM_TAPS; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    rst_n = 1'b0;
    taps  = rand_word();
    repeat (3) @(posedge clk);
    #1ps;
    checks++;
    if (therm != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    for (int c = 0; c < 200; c++) begin
      taps = rand_word();
      hist.push_back(taps);
      @(posedge clk);
      #1ps;
      if (hist.size() > 1) begin
        logic [NUM_TAPS-1:0] exp_w;
        exp_w = hist.pop_front();
        checks++;
        if (therm != exp_w) begin failures++; $display("FAIL cycle %0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
