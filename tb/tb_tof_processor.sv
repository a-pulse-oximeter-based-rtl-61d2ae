// tb_tof_processor - end-to-end test of the processing unit at its default
// sizes (448 taps, 37 bins of 16 bits, 600 MHz, 12,000,000-cycle frames).
//
// A clock-manager model supplies the fixed and the phase-shifted 600 MHz
// clocks; a laser/SPAD model fires on the sync output and returns photons
// with a fixed offset plus an exponential spread. The testbench records the
// true arrival time of every detected photon and builds its own histogram per
// frame from the arrival phase within the period of the phase-shifted clock
// (bin = floor(phase * 37 / 1667 ps)). It then checks:
//   * the laser sync: 250 ns period (4 MHz), 153.3 ns high;
//   * short frames (frame length register set to 30,007 cycles): every
//     streamed frame against the reference histogram, and its mean time <t>
//     (sum of i*I(i) / sum of I(i)) against the reference;
//   * dynamic phase shift: +20 steps of 15 ps must move <t> by -300 ps
//     (-6.66 bins), then -30 steps by +450 ps;
//   * a stalled stream consumer: whole frames dropped and counted;
//   * run cleared: no further frames;
//   * one frame at the default length of 20 ms (50 frames/s) with a laser
//     strong enough to push the peak bin past 65535: the bin must hold at
//     65535 and the lost events be counted.
// Each mechanism is counted and one that never happens is a failure.
module tb_tof_processor;
  import tof_pkg::*;

  localparam real PERIOD_PS = 1666.667;

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
  int mmcm_phase;

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

  // ------------------------------------------------------------ mechanisms
  int n_photons = 0, n_frames = 0, n_dropped_seen = 0, n_stall = 0;
  int n_phase_up = 0, n_phase_down = 0, n_saturated = 0, n_sync = 0, n_starts = 0;

  // ------------------------------------------------------------ reference
  realtime last_edge = 0.0;
  int      pend_bin [$];
  int      pend_left [$];
  int      ref_hist [NUM_BINS];
  int      ref_frames [$];          // NUM_BINS words per kept frame
  int      ref_amb [$];             // events near a bin edge, per kept frame
  int      amb = 0;

  function automatic int bin_of(input real phase_ps);
    int b = int'($floor(phase_ps * NUM_BINS / PERIOD_PS));
    return (b < 0) ? 0 : (b >= NUM_BINS ? NUM_BINS - 1 : b);
  endfunction

  always @(det_stb) begin
    real ph, x;
    n_photons++;
    ph = (det_time - last_edge) * 1000.0;      // ps after the last start edge
    pend_bin.push_back(bin_of(ph));
    pend_left.push_back(6);                     // counted at the sixth edge
    x = ph * NUM_BINS / PERIOD_PS;
    if (x - $floor(x) < 0.15 || x - $floor(x) > 0.85 || ph > PERIOD_PS - 8.0) amb++;
  end

  logic [31:0] dropped_before;
  always @(posedge clk_tdl) begin
    bit closing;
    last_edge = $realtime;
    closing = rst_n && frame_stop;
    if (rst_n && frame_start) n_starts++;
    dropped_before = frames_dropped;
    for (int i = 0; i < pend_left.size(); i++) pend_left[i]--;
    while (pend_left.size() > 0 && pend_left[0] <= 0) begin
      int b;
      void'(pend_left.pop_front());
      b = pend_bin.pop_front();
      if (frame_active) ref_hist[b]++;
    end
    if (closing) begin
      #1ps;
      if (frames_dropped == dropped_before) begin
        for (int i = 0; i < NUM_BINS; i++) ref_frames.push_back(ref_hist[i]);
        ref_amb.push_back(amb);
      end else begin
        n_dropped_seen++;
      end
      for (int i = 0; i < NUM_BINS; i++) ref_hist[i] = 0;
      amb = 0;
    end
  end

  // ------------------------------------------------------------ stream check
  int  got [NUM_BINS];
  int  words = 0;
  real mean_dut [$];
  real mean_ref [$];
  always @(posedge clk_tdl) begin
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      check(m_axis_tuser == (words == 0) && m_axis_tlast == (words == NUM_BINS - 1), "tuser/tlast framing");
      got[words] = int'(m_axis_tdata);
      words++;
      if (words == NUM_BINS) begin
        int  l1, a, e, w_dut, w_ref;
        real s_dut, s_ref;
        words = 0;
        n_frames++;
        check(ref_frames.size() >= NUM_BINS, "a frame was streamed that the reference did not close");
        if (ref_frames.size() >= NUM_BINS) begin
          l1 = 0; w_dut = 0; w_ref = 0; s_dut = 0.0; s_ref = 0.0;
          a = ref_amb.pop_front();
          for (int i = 0; i < NUM_BINS; i++) begin
            e = ref_frames.pop_front();
            if (e > 65535) begin
              n_saturated++;
              e = 65535;
            end
            l1 += (got[i] > e) ? got[i] - e : e - got[i];
            w_dut += got[i]; w_ref += e;
            s_dut += real'(i * got[i]); s_ref += real'(i * e);
          end
          // an event near a bin edge may land one bin over (two bins differ)
          check(l1 <= 2 * a + 2, $sformatf("frame %0d differs from the reference by %0d counts (%0d near edges)", n_frames, l1, a));
          if (w_dut > 0 && w_ref > 0) begin
            mean_dut.push_back(s_dut / w_dut);
            mean_ref.push_back(s_ref / w_ref);
            check(((s_dut / w_dut) - (s_ref / w_ref)) < 0.3 && ((s_ref / w_ref) - (s_dut / w_dut)) < 0.3,
                  $sformatf("frame %0d mean time %0.2f bins, reference %0.2f", n_frames, s_dut / w_dut, s_ref / w_ref));
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ sync check
  realtime sync_rise [$];
  realtime sync_fall [$];
  always @(posedge sync_out) begin sync_rise.push_back($realtime); n_sync++; end
  always @(negedge sync_out) sync_fall.push_back($realtime);

  // ------------------------------------------------------------ phase steps
  always @(posedge clk_tdl) if (ps_en) begin
    if (ps_incdec) n_phase_up++; else n_phase_down++;
  end

  // ------------------------------------------------------------ helpers
  task automatic write(input reg_addr_e a, input logic [31:0] d);
    @(negedge clk_tdl);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_tdl);
    cfg_we = 1'b0;
  endtask

  task automatic wait_frames(input int n);
    int target = int'(frames_sent) + int'(frames_dropped) + n;
    while (int'(frames_sent) + int'(frames_dropped) < target) @(negedge clk_tdl);
    // let the last frame finish streaming
    repeat (NUM_BINS * 4 + 10) @(negedge clk_tdl);
  endtask

  function automatic real avg(input real q [$], input int from);
    real s = 0.0;
    for (int i = from; i < q.size(); i++) s += q[i];
    return s / (q.size() - from);
  endfunction

  initial begin
    real m0, m1, m2;
    int  first;
    for (int i = 0; i < NUM_BINS; i++) ref_hist[i] = 0;
    rst_n = 1'b0;
    cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
    m_axis_tready = 1'b1;
    detect_permille = 300; offset_ps = 1037; spread_ps = 100;
    repeat (5) @(negedge clk_tdl);
    rst_n = 1'b1;
    repeat (5) @(negedge clk_tdl);

    // short frames, phase 0
    write(REG_FRAME_CYCLES, 32'd30_007);
    write(REG_CTRL, 32'd1);
    wait_frames(1);                       // first frame may be partial
    first = mean_dut.size();
    wait_frames(6);
    m0 = avg(mean_dut, first);
    $display("phase 0: <t> = %0.2f bins (reference %0.2f)", m0, avg(mean_ref, first));

    // sync pulse
    check(sync_rise.size() > 10, "no sync pulses");
    begin
      realtime p, h;
      p = sync_rise[sync_rise.size() - 1] - sync_rise[sync_rise.size() - 2];
      h = sync_fall[sync_fall.size() - 1] - sync_rise[sync_rise.size() - 2];
      if (h > p) h = sync_fall[sync_fall.size() - 2] - sync_rise[sync_rise.size() - 2];
      check(p > 249.9 && p < 250.1, $sformatf("sync period %0.3f ns", p));
      check(h > 153.2 && h < 153.4, $sformatf("sync high %0.3f ns", h));
    end

    // phase shift +20 steps (clock 300 ps later, photons 300 ps earlier in the period)
    write(REG_PHASE, 32'd20);
    while (ps_busy) @(negedge clk_tdl);
    check(mmcm_phase == 20 && phase_cur == 16'sd20, "phase not at +20");
    wait_frames(1);
    first = mean_dut.size();
    wait_frames(6);
    m1 = avg(mean_dut, first);
    $display("phase +20: <t> = %0.2f bins, shift %0.2f bins", m1, m1 - m0);
    check((m1 - m0) > -6.66 - 0.6 && (m1 - m0) < -6.66 + 0.6, $sformatf("shift +20 steps moved <t> by %0.2f bins", m1 - m0));

    // phase shift back to -10
    write(REG_PHASE, 32'hFFFF_FFF6);
    while (ps_busy) @(negedge clk_tdl);
    check(mmcm_phase == -10 && phase_cur == -16'sd10, "phase not at -10");
    wait_frames(1);
    first = mean_dut.size();
    wait_frames(6);
    m2 = avg(mean_dut, first);
    $display("phase -10: <t> = %0.2f bins, shift from +20 %0.2f bins", m2, m2 - m1);
    check((m2 - m1) > 9.99 - 0.6 && (m2 - m1) < 9.99 + 0.6, $sformatf("shift -30 steps moved <t> by %0.2f bins", m2 - m1));

    // stalled consumer: frames dropped
    m_axis_tready = 1'b0;
    wait_frames(3);
    m_axis_tready = 1'b1;
    wait_frames(2);
    check(frames_dropped >= 2, $sformatf("%0d frames dropped during the stall", frames_dropped));

    // stop: no new frames
    write(REG_CTRL, 32'd0);
    wait_frames(0);
    repeat (40_000) @(negedge clk_tdl);
    begin
      int n_before;
      n_before = int'(frames_sent) + int'(frames_dropped);
      repeat (40_000) @(negedge clk_tdl);
      check(int'(frames_sent) + int'(frames_dropped) == n_before, "frames after run was cleared");
    end

    // one full-length frame (default 12,000,000 cycles = 20 ms) that saturates;
    // the clock manager keeps its phase over a reset, so return it to 0 first
    write(REG_PHASE, 32'd0);
    while (ps_busy) @(negedge clk_tdl);
    rst_n = 1'b0;
    repeat (5) @(negedge clk_tdl);
    rst_n = 1'b1;
    begin
      int sent0;
      sent0 = int'(frames_sent);
      detect_permille = 1000; spread_ps = 0;   // every shot lands in bin 15
      ref_frames.delete(); ref_amb.delete();
      for (int i = 0; i < NUM_BINS; i++) ref_hist[i] = 0;
      write(REG_CTRL, 32'd1);
      while (int'(frames_sent) == sent0) @(negedge clk_tdl);
      write(REG_CTRL, 32'd0);
      repeat (NUM_BINS * 4 + 10) @(negedge clk_tdl);
      check(saturations > 0, "no saturation in a full frame");
      $display("full frame: %0d saturated events", saturations);
    end

    // mechanisms
    $display("photons %0d frames %0d dropped %0d stall cycles %0d phase up %0d down %0d saturated bins %0d sync %0d",
             n_photons, n_frames, n_dropped_seen, n_stall, n_phase_up, n_phase_down, n_saturated, n_sync);
    check(n_photons > 0, "no photons detected");
    check(n_frames > 0, "no frames streamed");
    check(n_dropped_seen > 0, "no frame dropped");
    check(n_stall > 0, "no stream stall");
    check(n_phase_up > 0, "no phase increment");
    check(n_phase_down > 0, "no phase decrement");
    check(n_saturated > 0, "no saturated bin");
    check(n_sync > 0, "no laser sync");
    check(n_starts >= n_frames, $sformatf("%0d frame starts for %0d frames", n_starts, n_frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40ms);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
