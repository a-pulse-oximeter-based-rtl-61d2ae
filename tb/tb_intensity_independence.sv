// tb_intensity_independence - the measurement the instrument exists for: the
// mean time <t> of the histograms must follow the shape of the photon
// arrival-time distribution and not its intensity.
//
// The top level runs at its default sizes with 120,007-cycle frames (200 us).
// The laser/SPAD model first keeps the same distribution (fixed offset plus an
// exponential spread of 100 ps) at three detection rates, 50 %, 15 % and 5 %
// of shots, as neutral density filters in the light path would. Then it
// narrows the spread to 40 ps at the original rate, as higher absorption in
// the tissue would. For each setting, four whole frames are summed, and the
// intensity W and mean time <t> are computed from the streamed bins. The
// testbench also computes W and <t> from the true arrival times of the
// photons the model produced in the same frames.
// Checks: W and <t> of the hardware agree with the reference (W within 2
// counts per frame, <t> within 0.1 bin); W falls with the detection rate
// (ratios within 25 % of 0.3 and 0.1); <t> of the three intensities agrees
// within 0.5 bin (statistical spread at the lowest rate is about 0.2 bin);
// the narrower spread lowers <t> by more than 0.6 bin.
module tb_intensity_independence;
  import tof_pkg::*;

  localparam real PERIOD_PS = 1666.667;
  localparam int  FRAMES    = 4;

  logic clk_tdl, clk_sync, rst_n;
  logic spad_stop, sync_out;
  logic ps_en, ps_incdec, ps_done;
  logic cfg_we;
  logic [3:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [15:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tuser, m_axis_tlast;
  logic [31:0] frames_sent, frames_dropped, saturations;
  logic signed [15:0] phase_cur;
  logic ps_busy;
  logic frame_start, frame_stop, frame_active;
  int   mmcm_phase;
  int   detect_permille, offset_ps, spread_ps;
  logic det_stb;
  realtime det_time;
  int checks = 0, failures = 0;

  tof_processor dut (
    .clk_tdl, .clk_sync, .rst_n, .spad_stop, .sync_out, .ps_en, .ps_incdec, .ps_done,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tuser, .m_axis_tlast,
    .frames_sent, .frames_dropped, .saturations, .phase_cur, .ps_busy,
    .frame_start, .frame_stop, .frame_active);

  mmcm_model u_mmcm (
    .psclk(clk_tdl), .psen(ps_en && rst_n), .psincdec(ps_incdec), .psdone(ps_done),
    .clk_fixed(clk_sync), .clk_shift(clk_tdl), .phase(mmcm_phase));

  spad_laser_model u_optics (
    .sync(sync_out), .detect_permille, .offset_ps, .spread_ps,
    .stop(spad_stop), .det_stb, .det_time);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference: photons detected while collecting
  bit      collect = 0;
  realtime last_edge = 0.0;
  real     ref_w = 0.0, ref_s = 0.0;
  always @(posedge clk_tdl) last_edge = $realtime;
  always @(det_stb) begin
    real ph;
    int  b;
    ph = (det_time - last_edge) * 1000.0;
    b  = int'($floor(ph * NUM_BINS / PERIOD_PS));
    if (b > NUM_BINS - 1) b = NUM_BINS - 1;
    if (collect) begin
      ref_w += 1.0;
      ref_s += real'(b);
    end
  end

  // which frames belong to the collection window, in the order they end
  bit frame_in_window [$];
  always @(posedge clk_tdl) if (rst_n && frame_stop) frame_in_window.push_back(collect);

  // hardware: sum of the streamed frames in the window
  real hw_w = 0.0, hw_s = 0.0;
  bit  cur_in = 0;
  int  idx = 0;
  always @(posedge clk_tdl) begin
    if (m_axis_tvalid && m_axis_tready) begin
      if (m_axis_tuser) cur_in = (frame_in_window.size() > 0) ? frame_in_window.pop_front() : 1'b0;
      if (cur_in) begin
        hw_w += real'(m_axis_tdata);
        hw_s += real'(idx) * real'(m_axis_tdata);
      end
      idx = m_axis_tlast ? 0 : idx + 1;
    end
  end

  task automatic write(input reg_addr_e a, input logic [31:0] d);
    @(negedge clk_tdl);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_tdl);
    cfg_we = 1'b0;
  endtask

  task automatic next_frame_stop();
    @(posedge clk_tdl);
    while (!frame_stop) @(posedge clk_tdl);
  endtask

  // one setting: W per frame and <t> in bins, hardware and reference
  task automatic measure(input int permille, input int spread, output real w, output real t);
    detect_permille = permille;
    spread_ps = spread;
    next_frame_stop();          // let the frame with mixed settings end
    #1ps;
    ref_w = 0.0; ref_s = 0.0; hw_w = 0.0; hw_s = 0.0;
    collect = 1;
    repeat (FRAMES) next_frame_stop();
    #1ps;
    collect = 0;
    repeat (NUM_BINS * 2 + 10) @(negedge clk_tdl);   // last frame streamed
    w = hw_w / FRAMES;
    t = (hw_w > 0.0) ? hw_s / hw_w : 0.0;
    $display("detect %0d permille, spread %0d ps: W = %0.1f per frame (reference %0.1f), <t> = %0.3f bins (reference %0.3f)",
             permille, spread, w, ref_w / FRAMES, t, (ref_w > 0.0) ? ref_s / ref_w : 0.0);
    check(hw_w > 0.0 && ref_w > 0.0, "no events");
    check(hw_w - ref_w <= 2.0 * FRAMES && ref_w - hw_w <= 2.0 * FRAMES,
          $sformatf("W %0.0f, reference %0.0f", hw_w, ref_w));
    if (hw_w > 0.0 && ref_w > 0.0)
      check(t - ref_s / ref_w < 0.1 && ref_s / ref_w - t < 0.1,
            $sformatf("<t> %0.3f, reference %0.3f", t, ref_s / ref_w));
  endtask

  initial begin
    real w0, t0, w1, t1, w2, t2, w3, t3;
    rst_n = 1'b0;
    cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
    m_axis_tready = 1'b1;
    detect_permille = 0; offset_ps = 1037; spread_ps = 100;
    repeat (5) @(negedge clk_tdl);
    rst_n = 1'b1;
    write(REG_FRAME_CYCLES, 32'd120_007);
    write(REG_CTRL, 32'd1);
    measure(500, 100, w0, t0);
    measure(150, 100, w1, t1);
    measure(50, 100, w2, t2);
    measure(500, 40, w3, t3);
    check(w1 / w0 > 0.3 * 0.75 && w1 / w0 < 0.3 * 1.25, $sformatf("intensity ratio %0.3f, expected 0.3", w1 / w0));
    check(w2 / w0 > 0.1 * 0.75 && w2 / w0 < 0.1 * 1.25, $sformatf("intensity ratio %0.3f, expected 0.1", w2 / w0));
    check(t1 - t0 < 0.5 && t0 - t1 < 0.5, $sformatf("<t> moved %0.3f bins with intensity", t1 - t0));
    check(t2 - t0 < 0.5 && t0 - t2 < 0.5, $sformatf("<t> moved %0.3f bins with intensity", t2 - t0));
    check(t0 - t3 > 0.6, $sformatf("narrower spread moved <t> by %0.3f bins only", t3 - t0));
    check(frames_dropped == 0 && saturations == 0, "frames dropped or bins saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10ms);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
