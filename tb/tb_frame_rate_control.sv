// tb_frame_rate_control - frames of a programmed length must follow each other
// without gaps while run is high: frame_start, then frame_cycles cycles of
// active, frame_stop on the last one. After run falls the current frame must
// end at its full length and no new one start. A length change applies from
// the next frame.
module tb_frame_rate_control;
  logic clk = 1'b0, rst_n, run;
  logic [31:0] frame_cycles;
  logic frame_start, frame_stop, active;
  int checks = 0, failures = 0;
  int cycle = 0;
  int starts [$];
  int stops  [$];

  frame_rate_control dut (.clk, .rst_n, .run, .frame_cycles, .frame_start, .frame_stop, .active);

  always #(833ps) clk = ~clk;

  // record events; active must cover exactly start..stop
  bit in_frame = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (frame_start) begin
        starts.push_back(cycle);
        checks++;
        if (in_frame) begin failures++; $display("FAIL start inside a frame at %0d", cycle); end
        in_frame = 1;
      end
      checks++;
      if (active != in_frame) begin failures++; $display("FAIL active=%0b at %0d", active, cycle); end
      if (frame_stop) begin
        stops.push_back(cycle);
        checks++;
        if (!in_frame) begin failures++; $display("FAIL stop outside a frame at %0d", cycle); end
        in_frame = 0;
      end
    end
    cycle++;
  end


  initial begin
    rst_n = 1'b0;
    run = 1'b0;
    frame_cycles = 32'd10;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    checks++;
    if (starts.size() != 0 || active) begin failures++; $display("FAIL frame without run"); end
    run = 1'b1;
    repeat (43) @(negedge clk);
    frame_cycles = 32'd7;          // applies from the next frame
    repeat (40) @(negedge clk);
    run = 1'b0;
    repeat (30) @(negedge clk);
    checks++;
    if (starts.size() != stops.size()) begin failures++; $display("FAIL open frame after run fell"); end
    // 10,10,10,10,10 (first five: 43 cycles puts the change inside frame 5) then 7s
    begin
      int lens [$];
      int n;
      n = starts.size();
      for (int i = 0; i < n; i++) lens.push_back(stops[i] - starts[i] + 1);
      checks++;
      if (n < 8) begin failures++; $display("FAIL only %0d frames", n); end
      for (int i = 0; i < n; i++) begin
        checks++;
        if (!(lens[i] == 10 && i < 5) && !(lens[i] == 7 && i >= 5)) begin
          failures++; $display("FAIL frame %0d is %0d cycles", i, lens[i]);
        end
        if (i > 0) begin
          checks++;
          if (starts[i] != stops[i-1] + 1) begin failures++; $display("FAIL gap before frame %0d", i); end
        end
      end
      // the last frame ends after run fell, no earlier
      checks++;
      if (stops[n-1] < 1 + 3 + 5 + 43 + 40 - 7) begin failures++; $display("FAIL last frame cut short"); end
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
