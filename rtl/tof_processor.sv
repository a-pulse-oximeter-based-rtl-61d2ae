// tof_processor - FPGA processing unit of a time-of-flight pulse oximeter.
//
// A laser fires at 4 MHz, synchronised to a 600 MHz clock; photons that cross
// the tissue reach a single SPAD, whose pulse is the stop input here. The
// start of every TDC measurement is an edge of the 600 MHz clock, so the time
// measured is the arrival phase of the photon inside one 1667 ps period. The
// stop edge runs down a 448-tap delay line (tdl_carry_chain), the taps are
// sampled on every clock edge (tdl_sampler), the encoder turns a new event into
// one of 37 bins of 45 ps (tdc_encoder), and the histogram generator counts the
// events of one frame in 37 x 16-bit bins and streams the frame out towards a
// video DMA and the network (histogram_generator, framed by frame_rate_control,
// 50 frames/s by default). The sync adjuster makes the laser trigger from the
// 600 MHz clock, and the driver holds the settings written from the PC and
// steps the clock manager's dynamic phase shift, which slides the TDC window
// along the photon arrival-time distribution.
//
// The clock manager, the DMA, the Ethernet side and the SPAD are outside this
// module. The clock manager supplies two 600 MHz clocks: clk_tdl, which the
// phase shift moves, and clk_sync, which it does not (the published block
// diagram feeds both the TDL and the sync adjuster from the 600 MHz output; the
// split into two outputs is this design's reading of it). Register access is
// in the clk_tdl domain. Sync settings are static once written, so they are
// used in the clk_sync domain without a handshake; only the reset is
// resynchronised there.
//
// The delay line is a behavioural model, so this module simulates but only its
// other parts synthesise; in an FPGA the model is replaced by a placed carry
// chain with the same ports.
module tof_processor #(
  parameter int unsigned NUM_BINS = tof_pkg::NUM_BINS,
  parameter int unsigned BIN_W    = tof_pkg::BIN_W
) (
  input  logic              clk_tdl,       // 600 MHz, phase shifted (TDC start)
  input  logic              clk_sync,      // 600 MHz, for the laser sync
  input  logic              rst_n,         // active low, synchronous to clk_tdl
  // sensor
  input  logic              spad_stop,     // SPAD pulse (TDC stop)
  // laser
  output logic              sync_out,      // 4 MHz laser trigger
  // clock manager dynamic phase shift (PSCLK = clk_tdl)
  output logic              ps_en,
  output logic              ps_incdec,
  input  logic              ps_done,
  // control registers, from the network side
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // histogram frames, to the video DMA
  output logic [BIN_W-1:0]  m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tuser,
  output logic              m_axis_tlast,
  // status
  output logic [31:0]       frames_sent,
  output logic [31:0]       frames_dropped,
  output logic [31:0]       saturations,
  output logic signed [15:0] phase_cur,
  output logic              ps_busy,
  // frame markers (for triggering external equipment and for test)
  output logic              frame_start,
  output logic              frame_stop,
  output logic              frame_active
);

  localparam int unsigned NUM_TAPS = tof_pkg::NUM_TAPS;
  localparam int unsigned CODE_W   = tof_pkg::CODE_W;

  // ---------------------------------------------------------------- TDC
  logic [NUM_TAPS-1:0] taps;
  logic [NUM_TAPS-1:0] therm;
  logic [CODE_W-1:0]   code;
  logic                code_valid;

  tdl_carry_chain #(.NUM_TAPS(NUM_TAPS)) u_chain (
    .stop (spad_stop),
    .taps (taps)
  );

  tdl_sampler #(.NUM_TAPS(NUM_TAPS)) u_sampler (
    .clk   (clk_tdl),
    .rst_n (rst_n),
    .taps  (taps),
    .therm (therm)
  );

  tdc_encoder #(.NUM_TAPS(NUM_TAPS), .NUM_BINS(NUM_BINS), .CODE_W(CODE_W)) u_encoder (
    .clk        (clk_tdl),
    .rst_n      (rst_n),
    .therm      (therm),
    .code       (code),
    .code_valid (code_valid)
  );

  // ---------------------------------------------------------------- control
  tof_pkg::ctrl_t ctrl;

  phase_driver u_driver (
    .clk            (clk_tdl),
    .rst_n          (rst_n),
    .cfg_we         (cfg_we),
    .cfg_addr       (cfg_addr),
    .cfg_wdata      (cfg_wdata),
    .cfg_rdata      (cfg_rdata),
    .frames_sent    (frames_sent),
    .frames_dropped (frames_dropped),
    .ctrl           (ctrl),
    .ps_en          (ps_en),
    .ps_incdec      (ps_incdec),
    .ps_done        (ps_done),
    .phase_cur      (phase_cur),
    .ps_busy        (ps_busy)
  );

  // ---------------------------------------------------------------- histogram
  frame_rate_control u_frames (
    .clk          (clk_tdl),
    .rst_n        (rst_n),
    .run          (ctrl.run),
    .frame_cycles (ctrl.frame_cycles),
    .frame_start  (frame_start),
    .frame_stop   (frame_stop),
    .active       (frame_active)
  );

  histogram_generator #(.NUM_BINS(NUM_BINS), .BIN_W(BIN_W), .CODE_W(CODE_W)) u_hist (
    .clk            (clk_tdl),
    .rst_n          (rst_n),
    .frame_stop     (frame_stop),
    .active         (frame_active),
    .code           (code),
    .code_valid     (code_valid),
    .m_tdata        (m_axis_tdata),
    .m_tvalid       (m_axis_tvalid),
    .m_tready       (m_axis_tready),
    .m_tuser        (m_axis_tuser),
    .m_tlast        (m_axis_tlast),
    .frames_sent    (frames_sent),
    .frames_dropped (frames_dropped),
    .saturations    (saturations)
  );

  // ---------------------------------------------------------------- laser sync
  logic [1:0] sync_rst_q;
  always_ff @(posedge clk_sync) sync_rst_q <= {sync_rst_q[0], rst_n};

  sync_adjuster u_sync (
    .clk    (clk_sync),
    .rst_n  (sync_rst_q[1]),
    .period (ctrl.sync_period),
    .high   (ctrl.sync_high),
    .delay  (ctrl.sync_delay),
    .sync   (sync_out)
  );

endmodule
