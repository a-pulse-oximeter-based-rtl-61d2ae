// tb_tdc_encoder - feeds delay-line samples as a real stop pulse produces
// them (all low, one partial thermometer word, then all high for a few
// cycles) and checks that exactly one code appears, three cycles after the
// partial word, with the bin of the arrival time. The expected bin is found by
// walking the 37 bin edges of 1667 ps / 37 in tap units, not by the encoder's
// formula. Also checks that an all-high first sample (arrival just after the
// start edge) gives bin 0 and that long high or low stretches give no code.
module tb_tdc_encoder;
  localparam int unsigned NUM_TAPS = 448;
  localparam int unsigned NUM_BINS = 37;

  logic clk = 1'b0, rst_n;
  logic [NUM_TAPS-1:0] therm;
  logic [7:0] code;
  logic code_valid;
  int checks = 0, failures = 0;
  int cycle = 0;
  int exp_code [$];
  int exp_cycle [$];
  int n_valid = 0, n_expected = 0;

  tdc_encoder dut (.clk, .rst_n, .therm, .code, .code_valid);

  always #(833ps) clk = ~clk;

  // bin of an arrival that left n taps high: the arrival is (448-n) taps after
  // the start edge; bin b covers [b*448/37, (b+1)*448/37) taps.
  function automatic int ref_bin(input int n);
    int arrival = NUM_TAPS - n;
    int b = 0;
    while (b < NUM_BINS - 1 && (b + 1) * NUM_TAPS <= arrival * NUM_BINS) b++;
    return b;
  endfunction

  function automatic logic [NUM_TAPS-1:0] therm_of(input int n);
    logic [NUM_TAPS-1:0] w = '0;
    for (int k = 0; k < n; k++) w[k] = 1'b1;
    return w;
  endfunction

  task automatic put(input logic [NUM_TAPS-1:0] w);
    @(negedge clk);
    therm = w;
  endtask

  // monitor
  always @(posedge clk) begin
    if (rst_n && code_valid) begin
      n_valid++;
      checks++;
      if (exp_code.size() == 0) begin
        failures++;
        $display("FAIL unexpected code %0d at cycle %0d", code, cycle);
      end else begin
        int ec, ecy;
        ec  = exp_code.pop_front();
        ecy = exp_cycle.pop_front();
        if (code != 8'(ec) || cycle != ecy) begin
          failures++;
          $display("FAIL code %0d at cycle %0d, expected %0d at cycle %0d", code, cycle, ec, ecy);
        end
      end
    end
    cycle++;
  end

  task automatic event_with(input int n);
    put('0);
    put(therm_of(n));
    // cycle counts the clock edges so far; the word is sampled at the next
    // edge and code_valid is set by the third edge after the sampling one
    exp_code.push_back(ref_bin(n));
    exp_cycle.push_back(cycle + 3);
    n_expected++;
    repeat (1 + $urandom % 6) put('1);
  endtask

  initial begin
    rst_n = 1'b0;
    therm = '1;
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    therm = '0;
    repeat (3) put('0);
    // every possible count
    for (int n = 1; n <= NUM_TAPS; n++) event_with(n);
    // random counts
    for (int i = 0; i < 300; i++) event_with(1 + $urandom % NUM_TAPS);
    // long stretches give nothing
    repeat (20) put('1);
    repeat (20) put('0);
    repeat (10) put('0);
    checks++;
    if (n_valid != n_expected || exp_code.size() != 0) begin
      failures++;
      $display("FAIL %0d codes for %0d events", n_valid, n_expected);
    end
    checks++;
    if (ref_bin(NUM_TAPS) != 0 || ref_bin(1) != NUM_BINS - 1) begin
      failures++;
      $display("FAIL reference bins at the ends");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
