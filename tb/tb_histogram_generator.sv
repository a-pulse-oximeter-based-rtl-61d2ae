// tb_histogram_generator - compares the streamed frames with a reference
// histogram kept in the testbench. Frames of a fixed length are marked with
// active/frame_stop; random codes (some out of range, which must be ignored)
// arrive on random cycles. The stream consumer is always ready, then randomly
// ready, then stalled across several frame ends (frames must be dropped whole
// and counted), and finally one long frame drives a bin past 2^16-1 (it must
// hold at 65535 and the lost counts must be counted). The first word of a
// frame must be offered in the cycle after frame_stop.
module tb_histogram_generator;
  localparam int NUM_BINS = 37;
  localparam int BIN_MAX  = 65535;

  logic clk = 1'b0, rst_n;
  logic frame_stop, active;
  logic [7:0] code;
  logic code_valid;
  logic [15:0] m_tdata;
  logic m_tvalid, m_tready, m_tuser, m_tlast;
  logic [31:0] frames_sent, frames_dropped, saturations;
  int checks = 0, failures = 0;

  histogram_generator dut (
    .clk, .rst_n, .frame_stop, .active, .code, .code_valid,
    .m_tdata, .m_tvalid, .m_tready, .m_tuser, .m_tlast,
    .frames_sent, .frames_dropped, .saturations);

  always #(833ps) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference model
  int ref_bins [NUM_BINS];
  int exp_words [$];   // expected frames, NUM_BINS words each
  int ref_sent = 0, ref_dropped = 0, ref_sat = 0;
  bit ref_reading = 0;
  int words_seen = 0;
  int got [NUM_BINS];
  bit expect_first = 0;
  int frames_checked = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      // stream monitor
      if (expect_first) check(m_tvalid && m_tuser, "first word not offered right after frame_stop");
      expect_first = 0;
      if (m_tvalid && m_tready) begin
        check(m_tuser == (words_seen == 0), "tuser not on the first word only");
        check(m_tlast == (words_seen == NUM_BINS - 1), "tlast not on the last word only");
        got[words_seen] = int'(m_tdata);
        words_seen++;
        if (words_seen == NUM_BINS) begin
          int e;
          words_seen = 0;
          check(exp_words.size() >= NUM_BINS, "frame streamed that was not expected");
          if (exp_words.size() >= NUM_BINS) begin
            for (int i = 0; i < NUM_BINS; i++) begin
              e = exp_words.pop_front();
              check(got[i] == e, $sformatf("frame %0d bin %0d: %0d, expected %0d", frames_checked, i, got[i], e));
            end
          end
          frames_checked++;
        end
      end
      // reference counting
      if (active && code_valid && int'(code) < NUM_BINS) begin
        int b;
        b = int'(code);
        if (ref_bins[b] < BIN_MAX) ref_bins[b] = ref_bins[b] + 1;
        else ref_sat++;
      end
      if (frame_stop) begin
        if (!ref_reading) begin
          for (int i = 0; i < NUM_BINS; i++) exp_words.push_back(ref_bins[i]);
          ref_sent++;
          expect_first = 1;
        end else begin
          ref_dropped++;
        end
        for (int i = 0; i < NUM_BINS; i++) ref_bins[i] = 0;
      end
      // reading ends with the last word taken; a frame_stop in the same cycle
      // still sees the bank busy
      if (m_tvalid && m_tready && m_tlast) ref_reading = 0;
      if (frame_stop && !ref_reading && expect_first) ref_reading = 1;
    end
  end

  // stimulus
  int ready_mode;   // 0 always, 1 random, 2 stalled
  task automatic run_frames(input int n, input int len, input int rate_pct, input bit one_bin);
    for (int f = 0; f < n; f++) begin
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        active     = 1'b1;
        frame_stop = (c == len - 1);
        code_valid = ($urandom % 100) < rate_pct;
        code       = one_bin ? 8'd5 : (($urandom % 10 == 0) ? 8'($urandom) : 8'($urandom % NUM_BINS));
        case (ready_mode)
          0: m_tready = 1'b1;
          1: m_tready = 1'($urandom % 2);
          default: m_tready = 1'b0;
        endcase
      end
    end
    @(negedge clk);
    frame_stop = 1'b0;
    code_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < NUM_BINS; i++) ref_bins[i] = 0;
    rst_n = 1'b0;
    active = 1'b0; frame_stop = 1'b0; code_valid = 1'b0; code = '0; m_tready = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // events outside a frame are ignored
    repeat (10) begin @(negedge clk); code_valid = 1'b1; code = 8'd3; end
    ready_mode = 0; run_frames(6, 200, 40, 0);
    ready_mode = 1; run_frames(6, 150, 60, 0);
    ready_mode = 2; run_frames(4, 60, 50, 0);
    ready_mode = 1; run_frames(4, 120, 50, 0);
    check(ref_dropped >= 3, "stall did not drop frames");
    // saturation: 70,000 events into bin 5
    ready_mode = 0; run_frames(1, 70_000, 100, 1);
    ready_mode = 0; run_frames(1, 100, 10, 0);
    active = 1'b0;
    repeat (100) @(negedge clk);
    check(ref_sat == 70_000 - BIN_MAX, $sformatf("reference saturations %0d", ref_sat));
    check(saturations == 32'(ref_sat), $sformatf("saturations %0d, expected %0d", saturations, ref_sat));
    check(frames_sent == 32'(ref_sent), $sformatf("frames_sent %0d, expected %0d", frames_sent, ref_sent));
    check(frames_dropped == 32'(ref_dropped), $sformatf("frames_dropped %0d, expected %0d", frames_dropped, ref_dropped));
    check(frames_checked == ref_sent && exp_words.size() == 0, "not every frame was streamed");
    $display("sent %0d dropped %0d saturated %0d", ref_sent, ref_dropped, ref_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
