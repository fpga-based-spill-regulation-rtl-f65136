// srs_pkg: types and constants shared by the spill regulation system (SRS).
//
// The SRS regulates the slow extraction of the Muon Delivery Ring by driving
// the tune-quadrupole current reference. It plays back a stored reference
// waveform at 10 kHz, adds a PID correction computed from the integrated
// beam intensity, and conditions the sum (slew limiting, safe ramp-down)
// before it reaches the quadrupole DAC.
//
// From the paper: 14-bit ADCs at 125 MSPS, eight stored spills, a 10 kHz
// control rate, 2048-entry log arrays. This design's own choices: the 125 MHz
// fabric clock (taken equal to the ADC rate), 16-bit DAC codes, the widths of
// integrals and corrections, and the host register map below.
package srs_pkg;

  localparam int unsigned ADC_W       = 14;     // ADC sample width (paper)
  localparam int unsigned DAC_W       = 16;     // quadrupole DAC code width (assumed)
  localparam int unsigned SUM_W       = 24;     // bunch integral width (assumed)
  localparam int unsigned CORR_W      = 16;     // signed PID correction width (assumed)
  localparam int unsigned NUM_SPILLS  = 8;      // Spill 1 .. Spill 8 (paper, Fig. 4)
  localparam int unsigned SPILL_LEN   = 2048;   // samples per stored spill (assumed)
  localparam int unsigned LOG_DEPTH   = 2048;   // log array length (paper, Fig. 7)
  localparam int unsigned CLK_HZ      = 125_000_000;  // fabric clock (assumed = ADC rate)
  localparam int unsigned TICK_HZ     = 10_000;       // playback / PID rate (paper)
  localparam int unsigned TICK_PERIOD = CLK_HZ / TICK_HZ;  // 12500 clocks

  // Host bus: 32-bit Avalon-MM, word addresses. Bits [15:14] select the region.
  localparam int unsigned BUS_AW = 16;
  typedef enum logic [1:0] {
    REGION_REGS     = 2'b00,  // control and status registers
    REGION_PLAYBACK = 2'b01,  // 8 spills x 2048 reference samples
    REGION_LOG_INT  = 2'b10,  // intensity log
    REGION_LOG_CORR = 2'b11   // correction log
  } region_e;

  // Register word addresses inside REGION_REGS.
  localparam logic [7:0] REG_CTRL       = 8'h00;
  localparam logic [7:0] REG_TICK_PER   = 8'h01;
  localparam logic [7:0] REG_TRIG_DELAY = 8'h02;
  localparam logic [7:0] REG_WIN_LEN    = 8'h03;
  localparam logic [7:0] REG_BASE_DELAY = 8'h04;
  localparam logic [7:0] REG_SETPOINT   = 8'h05;
  localparam logic [7:0] REG_KP         = 8'h06;
  localparam logic [7:0] REG_KI         = 8'h07;
  localparam logic [7:0] REG_KD         = 8'h08;
  localparam logic [7:0] REG_SLEW_MAX   = 8'h09;
  localparam logic [7:0] REG_RAMP_STEP  = 8'h0A;
  localparam logic [7:0] REG_RATE_DIV   = 8'h0B;
  localparam logic [7:0] REG_TIMEOUT    = 8'h0C;
  localparam logic [7:0] REG_SPILL_LEN  = 8'h0D;
  localparam logic [7:0] REG_STATUS     = 8'h0E;  // read only
  localparam logic [7:0] REG_INT_EXTR   = 8'h0F;  // read only: smoothed extracted intensity
  localparam logic [7:0] REG_INT_CIRC   = 8'h10;  // read only: smoothed circulating intensity
  localparam logic [7:0] REG_PID_ERR    = 8'h11;  // read only: last PID error

  // Settings distributed from the register file to the datapath.
  typedef struct packed {
    logic              fb_enable;    // CTRL[0]: add PID correction
    logic              fb_src_circ;  // CTRL[1]: regulate circulating instead of extracted
    logic              soft_abort;   // CTRL[2]: host-requested ramp-down
    logic [15:0]       tick_period;  // clocks per 10 kHz tick
    logic [15:0]       trig_delay;   // samples from RF trigger to window
    logic [15:0]       win_len;      // integration window, samples
    logic [15:0]       base_delay;   // samples from trigger to baseline window
    logic [SUM_W-1:0]  setpoint;     // target smoothed intensity
    logic signed [15:0] kp;          // PID gains, Q8.8
    logic signed [15:0] ki;
    logic signed [15:0] kd;
    logic [15:0]       slew_max;     // max DAC step per conditioning update
    logic [15:0]       ramp_step;    // DAC step per update during ramp-down
    logic [15:0]       rate_div;     // clocks per conditioning update
    logic [15:0]       timeout;      // spill timeout, in ticks
    logic [15:0]       spill_len;    // samples played per spill
  } srs_cfg_t;

  typedef enum logic [1:0] {
    COND_IDLE = 2'd0,  // output held at zero
    COND_RUN  = 2'd1,  // following reference + correction, slew limited
    COND_RAMP = 2'd2   // safe ramp-down to zero after abort or timeout
  } cond_state_e;

endpackage
