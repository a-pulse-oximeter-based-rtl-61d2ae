// tb_phase_driver - register writes and reads, and the phase-shift handshake
// against a clock-manager model that answers each ps_en pulse with ps_done
// twelve cycles later. Moving to +5 must take exactly 5 increment pulses,
// then to -3 exactly 8 decrement pulses, never a pulse while a step is
// outstanding, and the busy flag must drop when the target is reached.
module tb_phase_driver;
  import tof_pkg::*;

  logic clk = 1'b0, rst_n;
  logic cfg_we;
  logic [3:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [31:0] frames_sent, frames_dropped;
  ctrl_t ctrl;
  logic ps_en, ps_incdec, ps_done, ps_busy;
  logic signed [15:0] phase_cur;
  int checks = 0, failures = 0;

  phase_driver dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
                    .frames_sent, .frames_dropped, .ctrl, .ps_en, .ps_incdec, .ps_done,
                    .phase_cur, .ps_busy);

  always #(833ps) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // clock manager model
  int n_inc = 0, n_dec = 0, model_phase = 0, outstanding = 0, wait_cnt = 0;
  bit model_dir;
  always @(posedge clk) begin
    ps_done <= 1'b0;
    if (rst_n && ps_en) begin
      check(outstanding == 0, "ps_en while a step is outstanding");
      outstanding = 1;
      model_dir = ps_incdec;
      wait_cnt = 12;
      if (ps_incdec) n_inc++; else n_dec++;
    end else if (outstanding != 0) begin
      wait_cnt--;
      if (wait_cnt == 0) begin
        outstanding = 0;
        model_phase += model_dir ? 1 : -1;
        ps_done <= 1'b1;
      end
    end
  end

  task automatic write(input reg_addr_e a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic read_check(input reg_addr_e a, input logic [31:0] d);
    @(negedge clk);
    cfg_addr = a;
    #1ps;
    check(cfg_rdata == d, $sformatf("reg %0d reads %h, expected %h", a, cfg_rdata, d));
  endtask

  task automatic go_to(input int target, input int exp_inc, input int exp_dec);
    n_inc = 0; n_dec = 0;
    write(REG_PHASE, 32'(target));
    repeat (2) @(negedge clk);
    if (exp_inc + exp_dec > 0) check(ps_busy, "not busy after a new target");
    for (int i = 0; i < 1000 && ps_busy; i++) @(negedge clk);
    check(!ps_busy, "still busy");
    check(n_inc == exp_inc && n_dec == exp_dec,
          $sformatf("to %0d: %0d up, %0d down pulses, expected %0d, %0d", target, n_inc, n_dec, exp_inc, exp_dec));
    check(int'(phase_cur) == target && model_phase == target,
          $sformatf("phase %0d, model %0d, target %0d", phase_cur, model_phase, target));
    read_check(REG_STATUS, {16'(target), 16'd0});
  endtask

  initial begin
    rst_n = 1'b0;
    cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
    frames_sent = 32'd1234; frames_dropped = 32'd7;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // reset values
    read_check(REG_CTRL, 32'd0);
    read_check(REG_FRAME_CYCLES, 32'd12_000_000);
    read_check(REG_SYNC_PERIOD, 32'd150);
    read_check(REG_SYNC_HIGH, 32'd92);
    read_check(REG_FRAMES, 32'd1234);
    read_check(REG_DROPPED, 32'd7);
    check(!ps_busy && !ps_en, "idle after reset");
    // writes reach ctrl
    write(REG_CTRL, 32'd1);
    write(REG_FRAME_CYCLES, 32'd5000);
    write(REG_SYNC_DELAY, 32'd9);
    check(ctrl.run && ctrl.frame_cycles == 32'd5000 && ctrl.sync_delay == 16'd9, "ctrl fields");
    read_check(REG_CTRL, 32'd1);
    read_check(REG_SYNC_DELAY, 32'd9);
    // phase shifts
    go_to(5, 5, 0);
    go_to(-3, 0, 8);
    go_to(-3, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
