// histogram_generator - per-frame histogram of TDC codes, streamed out.
//
// Each event code from the encoder increments one of NUM_BINS counters of BIN_W
// bits (37 x 16 bits in the prototype). Counting happens only inside a frame, as
// marked by frame_rate_control. There are two banks of counters: one counts the
// current frame while the other, holding the previous frame, is streamed out
// and cleared word by word as it is sent. At the last cycle of a frame the banks
// change roles. If the previous frame has not been fully sent by then, the
// frame just finished is discarded (its bank cleared in that cycle) and counted
// in frames_dropped, so a slow consumer loses whole frames but never mixes two.
// A counter at its maximum stays there and each such lost count is counted in
// saturations. The two banks, the drop rule and the saturation are this
// design's choices; the bin count and depth follow the prototype.
//
// Output stream (AXI4-Stream video style, for a video DMA): one word per bin,
// bin 0 first; m_tuser marks bin 0 (start of frame) and m_tlast the last bin.
// m_tdata/m_tuser/m_tlast are held while m_tvalid is high and m_tready low.
//
// Timing: an event at code_valid is in its bank at the next edge. The first
// word of a frame is valid in the cycle after frame_stop; with m_tready held
// high a frame takes NUM_BINS cycles to send.
module histogram_generator #(
  parameter int unsigned NUM_BINS = tof_pkg::NUM_BINS,
  parameter int unsigned BIN_W    = tof_pkg::BIN_W,
  parameter int unsigned CODE_W   = tof_pkg::CODE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // frame timing
  input  logic              frame_stop,
  input  logic              active,
  // events
  input  logic [CODE_W-1:0] code,
  input  logic              code_valid,
  // frame stream
  output logic [BIN_W-1:0]  m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tuser,
  output logic              m_tlast,
  // statistics
  output logic [31:0]       frames_sent,
  output logic [31:0]       frames_dropped,
  output logic [31:0]       saturations
);

  localparam int unsigned IDX_W = $clog2(NUM_BINS);
  localparam logic [BIN_W-1:0] BIN_MAX = '1;

  logic [BIN_W-1:0] bank [2][NUM_BINS];
  logic             acc_sel;       // bank counting the current frame
  logic             reading;       // the other bank is being sent
  logic [IDX_W-1:0] rd_idx;

  logic count_event;
  logic swap;
  logic send;
  assign count_event = active && code_valid && (code < CODE_W'(NUM_BINS));
  assign swap        = frame_stop && !reading;
  assign send        = reading && m_tready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < NUM_BINS; i++) bank[b][i] <= '0;
      acc_sel        <= 1'b0;
      reading        <= 1'b0;
      rd_idx         <= '0;
      frames_sent    <= '0;
      frames_dropped <= '0;
      saturations    <= '0;
    end else begin
      // Count into the current bank.
      if (count_event) begin
        if (bank[acc_sel][code[IDX_W-1:0]] != BIN_MAX)
          bank[acc_sel][code[IDX_W-1:0]] <= bank[acc_sel][code[IDX_W-1:0]] + 1'b1;
        else
          saturations <= saturations + 1'b1;
      end

      // Send and clear the other bank.
      if (send) begin
        bank[!acc_sel][rd_idx] <= '0;
        if (rd_idx == IDX_W'(NUM_BINS - 1)) begin
          reading <= 1'b0;
          rd_idx  <= '0;
        end else begin
          rd_idx  <= rd_idx + 1'b1;
        end
      end

      // End of frame: hand the bank over, or drop the frame.
      if (frame_stop) begin
        if (swap) begin
          acc_sel     <= !acc_sel;
          reading     <= 1'b1;
          rd_idx      <= '0;
          frames_sent <= frames_sent + 1'b1;
        end else begin
          for (int i = 0; i < NUM_BINS; i++) bank[acc_sel][i] <= '0;
          frames_dropped <= frames_dropped + 1'b1;
        end
      end
    end
  end

  assign m_tvalid = reading;
  assign m_tdata  = bank[!acc_sel][rd_idx];
  assign m_tuser  = reading && rd_idx == '0;
  assign m_tlast  = reading && rd_idx == IDX_W'(NUM_BINS - 1);

  // Stream rule: a word offered and not taken stays unchanged.
  property p_stream_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tlast) && $stable(m_tuser));
  endproperty
  a_stream_hold: assert property (p_stream_hold);

endmodule
