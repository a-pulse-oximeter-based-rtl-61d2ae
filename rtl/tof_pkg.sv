// tof_pkg - constants and types shared by the time-of-flight histogram processor.
//
// The TDC is a tapped delay line of 448 taps that spans one period of the
// 600 MHz start clock (1667 ps). The encoder folds the taps into 37 bins of
// 45 ps on average, and the histogram generator counts events per bin in
// 16-bit counters, one histogram per frame (50 frames/s). These numbers are
// those of the published prototype. The register map used by the control
// side (network to FPGA) is this design's own choice.
package tof_pkg;

  localparam int unsigned NUM_TAPS     = 448;        // delay taps in the TDL
  localparam int unsigned NUM_BINS     = 37;         // histogram bins per period
  localparam int unsigned BIN_W        = 16;         // bits per histogram bin
  localparam int unsigned CODE_W       = 8;          // encoder output width
  localparam int unsigned CLK_MHZ      = 600;        // start clock
  localparam int unsigned FRAME_RATE   = 50;         // frames per second
  localparam int unsigned FRAME_CYCLES = CLK_MHZ * 1_000_000 / FRAME_RATE; // 12,000,000
  localparam int unsigned SYNC_PERIOD  = 150;        // 600 MHz / 4 MHz
  localparam int unsigned SYNC_HIGH    = 92;         // 153 ns high time (61 %)

  // Control registers, word addresses.
  typedef enum logic [3:0] {
    REG_CTRL         = 4'd0,   // bit 0: run (start acquisition)
    REG_PHASE        = 4'd1,   // signed target phase, in MMCM fine phase steps
    REG_FRAME_CYCLES = 4'd2,   // frame length in clock cycles
    REG_SYNC_PERIOD  = 4'd3,   // sync period in clock cycles
    REG_SYNC_HIGH    = 4'd4,   // sync high time in clock cycles
    REG_SYNC_DELAY   = 4'd5,   // sync delay in clock cycles
    REG_STATUS       = 4'd6,   // read only: bit 0 phase busy, [31:16] current phase
    REG_FRAMES       = 4'd7,   // read only: frames sent
    REG_DROPPED      = 4'd8    // read only: frames dropped
  } reg_addr_e;

  // Settings handed from the driver to the rest of the design.
  typedef struct packed {
    logic        run;
    logic [31:0] frame_cycles;
    logic [15:0] sync_period;
    logic [15:0] sync_high;
    logic [15:0] sync_delay;
  } ctrl_t;

endpackage
