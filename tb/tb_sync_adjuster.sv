// tb_sync_adjuster - with the default settings (150-cycle period, 92 cycles
// high) the output must be a 4 MHz pulse of 153.3 ns at a 1667 ps clock; a
// second instance with a delay of d cycles must rise exactly d cycles after
// the first; changed period and high time must be followed.
module tb_sync_adjuster;
  logic clk = 1'b0, rst_n;
  logic [15:0] period, high, delay_a, delay_b;
  logic sync_a, sync_b;
  int checks = 0, failures = 0;
  int cycle = 0;

  sync_adjuster dut_a (.clk, .rst_n, .period, .high, .delay(delay_a), .sync(sync_a));
  sync_adjuster dut_b (.clk, .rst_n, .period, .high, .delay(delay_b), .sync(sync_b));

  always #(833ps) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int rise_a [$], fall_a [$], rise_b [$];
  logic pa = 0, pb = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (sync_a && !pa) rise_a.push_back(cycle);
      if (!sync_a && pa) fall_a.push_back(cycle);
      if (sync_b && !pb) rise_b.push_back(cycle);
    end
    pa = sync_a;
    pb = sync_b;
    cycle++;
  end

  // measured times of the first instance, in real time
  realtime t_rise [$];
  always @(posedge sync_a) t_rise.push_back($realtime);

  task automatic measure(input int p, input int h, input int d, input int n_periods);
    period  = 16'(p);
    high    = 16'(h);
    delay_a = 16'd0;
    delay_b = 16'(d);
    rst_n   = 1'b0;
    repeat (3) @(negedge clk);
    rise_a.delete(); fall_a.delete(); rise_b.delete();
    rst_n   = 1'b1;
    repeat (p * n_periods + 5) @(negedge clk);
    check(rise_a.size() >= n_periods - 1, $sformatf("p=%0d: %0d pulses", p, rise_a.size()));
    for (int i = 1; i < rise_a.size(); i++)
      check(rise_a[i] - rise_a[i-1] == p, $sformatf("p=%0d: period %0d", p, rise_a[i] - rise_a[i-1]));
    for (int i = 0; i < fall_a.size(); i++)
      if (i < rise_a.size() && fall_a[i] > rise_a[i])
        check(fall_a[i] - rise_a[i] == h, $sformatf("p=%0d: high %0d cycles, expected %0d", p, fall_a[i] - rise_a[i], h));
    for (int i = 1; i < rise_b.size() && i < rise_a.size(); i++)
      check(rise_b[i] - rise_a[i] == d || rise_b[i] - rise_a[i-1] == d,
            $sformatf("delay %0d: b rises %0d cycles after a", d, rise_b[i] - rise_a[i]));
  endtask

  initial begin
    rst_n = 1'b0;
    period = 16'd150; high = 16'd92; delay_a = '0; delay_b = '0;
    // prototype setting: 4 MHz, 153 ns high
    measure(150, 92, 17, 5);
    begin
      realtime per;
      per = t_rise[t_rise.size() - 1] - t_rise[t_rise.size() - 2];
      check(per > 249.8 && per < 250.2, $sformatf("sync period %0f ns", per));
    end
    measure(40, 10, 3, 6);
    measure(25, 24, 24, 6);
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
