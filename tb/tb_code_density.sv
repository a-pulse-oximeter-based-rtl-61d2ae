// tb_code_density - code density test of the TDC through the whole design.
//
// Stop pulses arrive at random times, unrelated to the 600 MHz clock, so every
// part of the 1667 ps period is equally likely and each bin should collect
// hits in proportion to its width. The test runs the top level at its default
// sizes, with the frame length register set to 1,000,000 cycles, sums the
// streamed frames and computes, for each bin i (1-based, as usually plotted)
//     DNL(i) = (I(i) - I_avg) / I_avg        INL(i) = DNL(1) + ... + DNL(i)
// in units of the average bin (45 ps). The prototype's hardware reached DNL
// within +-0.15 LSB and INL within -0.55..+0.15 LSB; the evenly tapped delay
// line model must stay inside +-0.15 LSB DNL and +-0.55 LSB INL. Since 448
// taps do not divide into 37 bins, bins are 12 or 13 taps wide, which shows
// up as a DNL of about +0.07 on the wider bins. No bin may be empty (missing
// code).
module tb_code_density;
  import tof_pkg::*;

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

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // random stop pulses: 5 ns high, then a random gap of 25..65 ns in 1 ps steps
  bit hits_on = 0;
  int n_hits_in_frames = 0;
  initial begin
    spad_stop = 1'b0;
    forever begin
      #((25_000 + $urandom % 40_000) * 1ps);
      if (hits_on) begin
        spad_stop = 1'b1;
        #(5ns);
        spad_stop = 1'b0;
      end
    end
  end

  // sum of all streamed frames
  longint total [NUM_BINS];
  longint n_words = 0, n_events = 0;
  int     idx = 0;
  always @(posedge clk_tdl) begin
    if (m_axis_tvalid && m_axis_tready) begin
      total[idx] += longint'(m_axis_tdata);
      n_events   += longint'(m_axis_tdata);
      idx = m_axis_tlast ? 0 : idx + 1;
      n_words++;
    end
  end

  task automatic write(input reg_addr_e a, input logic [31:0] d);
    @(negedge clk_tdl);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_tdl);
    cfg_we = 1'b0;
  endtask

  localparam int FRAMES = 4;

  initial begin
    real avg, dnl, inl, dnl_min, dnl_max, inl_min, inl_max;
    for (int i = 0; i < NUM_BINS; i++) total[i] = 0;
    rst_n = 1'b0;
    cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
    m_axis_tready = 1'b1;
    repeat (5) @(negedge clk_tdl);
    rst_n = 1'b1;
    hits_on = 1;
    write(REG_FRAME_CYCLES, 32'd1_000_000);
    write(REG_CTRL, 32'd1);
    while (int'(frames_sent) < FRAMES) @(negedge clk_tdl);
    write(REG_CTRL, 32'd0);
    repeat (NUM_BINS * 2 + 10) @(negedge clk_tdl);
    hits_on = 0;

    check(n_words == longint'(FRAMES * NUM_BINS), $sformatf("%0d words streamed", n_words));
    check(frames_dropped == 0 && saturations == 0, "frames dropped or bins saturated");
    avg = real'(n_events) / NUM_BINS;
    check(avg > 2000.0, $sformatf("only %0.0f hits per bin", avg));
    inl = 0.0;
    dnl_min = 1.0; dnl_max = -1.0; inl_min = 1.0; inl_max = -1.0;
    for (int i = 0; i < NUM_BINS; i++) begin
      check(total[i] > 0, $sformatf("missing code %0d", i));
      dnl = (real'(total[i]) - avg) / avg;
      inl += dnl;
      if (dnl < dnl_min) dnl_min = dnl;
      if (dnl > dnl_max) dnl_max = dnl;
      if (inl < inl_min) inl_min = inl;
      if (inl > inl_max) inl_max = inl;
      check(dnl > -0.15 && dnl < 0.15, $sformatf("DNL(%0d) = %0.3f LSB", i + 1, dnl));
      check(inl > -0.55 && inl < 0.55, $sformatf("INL(%0d) = %0.3f LSB", i + 1, inl));
    end
    $display("code density: %0d events, %0.0f per bin, DNL %0.3f..%0.3f LSB, INL %0.3f..%0.3f LSB",
             n_events, avg, dnl_min, dnl_max, inl_min, inl_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20ms);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
