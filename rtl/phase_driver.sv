// phase_driver - control registers and the MMCM dynamic phase-shift sequencer.
//
// The PC writes settings over the network into the registers listed in tof_pkg
// (run, target phase, frame length, sync period/high/delay) and reads back the
// status and frame counters. The target phase is a signed number of fine phase
// steps of the clock manager. The sequencer moves the current phase one step at
// a time towards the target: it pulses ps_en for one cycle with ps_incdec = 1
// to move later (0 for earlier), waits for ps_done, updates its count and goes
// on. This is the PSEN/PSINCDEC/PSDONE handshake of the Xilinx MMCM. The
// prototype names this block only; the register map and the step-by-step
// sequencing are this design's.
//
// Interface: clk, rst_n (synchronous, active low); register port cfg_we,
// cfg_addr, cfg_wdata (write takes effect at the next edge) and cfg_rdata
// (combinational read of cfg_addr); frames_sent/frames_dropped in; ctrl out;
// ps_en, ps_incdec out and ps_done in; phase_cur and ps_busy out.
module phase_driver
  import tof_pkg::*;
#(
  parameter int unsigned PHASE_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [3:0]         cfg_addr,
  input  logic [31:0]        cfg_wdata,
  output logic [31:0]        cfg_rdata,
  input  logic [31:0]        frames_sent,
  input  logic [31:0]        frames_dropped,
  output ctrl_t              ctrl,
  output logic               ps_en,
  output logic               ps_incdec,
  input  logic               ps_done,
  output logic signed [PHASE_W-1:0] phase_cur,
  output logic               ps_busy
);

  logic signed [PHASE_W-1:0] phase_tgt;

  // Registers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl.run          <= 1'b0;
      ctrl.frame_cycles <= 32'(FRAME_CYCLES);
      ctrl.sync_period  <= 16'(SYNC_PERIOD);
      ctrl.sync_high    <= 16'(SYNC_HIGH);
      ctrl.sync_delay   <= '0;
      phase_tgt         <= '0;
    end else if (cfg_we) begin
      case (cfg_addr)
        REG_CTRL:         ctrl.run          <= cfg_wdata[0];
        REG_PHASE:        phase_tgt         <= cfg_wdata[PHASE_W-1:0];
        REG_FRAME_CYCLES: ctrl.frame_cycles <= cfg_wdata;
        REG_SYNC_PERIOD:  ctrl.sync_period  <= cfg_wdata[15:0];
        REG_SYNC_HIGH:    ctrl.sync_high    <= cfg_wdata[15:0];
        REG_SYNC_DELAY:   ctrl.sync_delay   <= cfg_wdata[15:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (cfg_addr)
      REG_CTRL:         cfg_rdata = {31'd0, ctrl.run};
      REG_PHASE:        cfg_rdata = 32'(phase_tgt);
      REG_FRAME_CYCLES: cfg_rdata = ctrl.frame_cycles;
      REG_SYNC_PERIOD:  cfg_rdata = {16'd0, ctrl.sync_period};
      REG_SYNC_HIGH:    cfg_rdata = {16'd0, ctrl.sync_high};
      REG_SYNC_DELAY:   cfg_rdata = {16'd0, ctrl.sync_delay};
      REG_STATUS:       cfg_rdata = {16'(phase_cur), 15'd0, ps_busy};
      REG_FRAMES:       cfg_rdata = frames_sent;
      REG_DROPPED:      cfg_rdata = frames_dropped;
      default:          cfg_rdata = '0;
    endcase
  end

  // Phase-shift sequencer.
  typedef enum logic [0:0] {PS_IDLE, PS_WAIT} ps_state_e;
  ps_state_e state;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= PS_IDLE;
      ps_en     <= 1'b0;
      ps_incdec <= 1'b0;
      phase_cur <= '0;
    end else begin
      ps_en <= 1'b0;
      case (state)
        PS_IDLE:
          if (phase_cur != phase_tgt) begin
            ps_en     <= 1'b1;
            ps_incdec <= phase_tgt > phase_cur;
            state     <= PS_WAIT;
          end
        PS_WAIT:
          if (ps_done) begin
            phase_cur <= ps_incdec ? phase_cur + 1'b1 : phase_cur - 1'b1;
            state     <= PS_IDLE;
          end
        default: state <= PS_IDLE;
      endcase
    end
  end

  assign ps_busy = (state == PS_WAIT) || (phase_cur != phase_tgt);

  // Handshake rules: one-cycle ps_en pulses, and no new pulse before ps_done.
  a_ps_en_pulse: assert property (@(posedge clk) disable iff (!rst_n) ps_en |=> !ps_en);
  a_ps_done_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                       ps_done |-> state == PS_WAIT);

endmodule
