// srs_top: FPGA fabric of the spill regulation system (SRS).
//
// Data flow (one clock, 125 MHz, equal to the ADC sample rate):
//
//   adc_extr --> bunch_integrator --> moving_average --+--> pid_controller --+
//   adc_circ --> bunch_integrator --> moving_average --+    (10 kHz tick)    |
//   rf_marker -> both integrators                                            v
//   spill_sequencer -> playback_generator -> ref ----------------------> (+) sum
//                      (10 kHz timer, dp_ram of 8 spills)                    |
//                                                 spill_conditioning <-------+
//                                                 (slew limit, ramp-down) -> dac_quad
//   spill_logger: per tick, the smoothed intensity the PID used and its
//                 correction, 2048 deep
//   dac_diag:     every raw extracted-beam bunch integral, for comparison
//                 with the monitor signal on an oscilloscope
//   config_regs:  Avalon-MM slave for settings, waveform upload, log readback
//
// A spill starts with spill_event (cycle_start selects spill 0 of the cycle).
// From then on, every 10 kHz tick plays the next stored reference sample and
// runs the PID on the latest smoothed intensity of the selected monitor
// (extracted beam by default, CTRL[1] selects the circulating beam). The sum
// of reference and correction is slew-limited on its way to the quadrupole
// DAC. An abort (pin or CTRL[2]) or the spill timeout ramps the DAC code down
// to zero, which ends the spill.
//
// Follows the paper: the blocks and connections of the SRS architecture
// (two fast bunch integrators, playback memory for eight spills with a
// playback generator, a fast regulation controller summed with the
// reference, final conditioning with ramp-down and slew limiting, a spill
// logger, and a memory-mapped user configuration). This design's own
// choices: all widths, the register map, the saturation of the diagnostic
// replay output, synchronizing abort_in with two
// flops, a single DAC output carrying the quadrupole curve, and logging only
// while a spill is active. The ARM processor, the ADC and DAC chips and the
// slow (off-board) regulation loop are outside this module: their signals
// are the ports.
module srs_top
  import srs_pkg::*;
#(
  parameter int unsigned NSPILL  = NUM_SPILLS,
  parameter int unsigned SLEN    = SPILL_LEN,
  parameter int unsigned LDEPTH  = LOG_DEPTH,
  parameter int unsigned MA_LOG2 = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // beam monitor ADCs
  input  logic signed [ADC_W-1:0] adc_circ,
  input  logic signed [ADC_W-1:0] adc_extr,
  input  logic                    rf_marker,
  // timing events
  input  logic                    cycle_start,
  input  logic                    spill_event,
  input  logic                    abort_in,
  // quadrupole DAC
  output logic [DAC_W-1:0]        dac_quad,
  // diagnostic high-speed DAC: latest extracted-beam bunch integral
  output logic signed [DAC_W-1:0] dac_diag,
  // host Avalon-MM slave
  input  logic [BUS_AW-1:0]       avs_address,
  input  logic                    avs_write,
  input  logic [31:0]             avs_writedata,
  input  logic                    avs_read,
  output logic [31:0]             avs_readdata,
  output logic                    avs_readdatavalid,
  // status
  output logic                    spill_active,
  output logic                    tick,
  output cond_state_e             cond_state
);

  localparam int unsigned IW = $clog2(NSPILL);
  localparam int unsigned SW = $clog2(SLEN);
  localparam int unsigned LW = $clog2(LDEPTH);

  srs_cfg_t cfg;

  // ---------------------------------------------------------------- intensity
  logic signed [SUM_W-1:0] int_c, int_e, ma_c, ma_e;
  logic                    int_c_v, int_e_v, ma_c_v, ma_e_v, busy_c, busy_e;
  logic                    spill_go;

  bunch_integrator #(.ADC_W(ADC_W), .SUM_W(SUM_W)) u_int_circ (
    .clk, .rst_n, .adc(adc_circ), .rf_marker,
    .cfg_trig_delay(cfg.trig_delay), .cfg_win_len(cfg.win_len),
    .cfg_base_delay(cfg.base_delay),
    .integral(int_c), .integral_valid(int_c_v), .busy(busy_c)
  );

  bunch_integrator #(.ADC_W(ADC_W), .SUM_W(SUM_W)) u_int_extr (
    .clk, .rst_n, .adc(adc_extr), .rf_marker,
    .cfg_trig_delay(cfg.trig_delay), .cfg_win_len(cfg.win_len),
    .cfg_base_delay(cfg.base_delay),
    .integral(int_e), .integral_valid(int_e_v), .busy(busy_e)
  );

  moving_average #(.W(SUM_W), .LOG2_N(MA_LOG2)) u_ma_circ (
    .clk, .rst_n, .clear(spill_go), .in_valid(int_c_v), .in_data(int_c),
    .out_valid(ma_c_v), .out_data(ma_c)
  );

  moving_average #(.W(SUM_W), .LOG2_N(MA_LOG2)) u_ma_extr (
    .clk, .rst_n, .clear(spill_go), .in_valid(int_e_v), .in_data(int_e),
    .out_valid(ma_e_v), .out_data(ma_e)
  );

  // Diagnostic replay of every extracted-beam bunch integral, before the
  // moving average, saturated to the DAC range and held until the next bunch.
  localparam logic signed [SUM_W-1:0] DIAG_MAX = SUM_W'((1 << (DAC_W - 1)) - 1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             dac_diag <= '0;
    else if (int_e_v) begin
      if (int_e > DIAG_MAX)       dac_diag <= DAC_W'(DIAG_MAX);
      else if (int_e < -DIAG_MAX) dac_diag <= DAC_W'(-DIAG_MAX);
      else                        dac_diag <= DAC_W'(int_e);
    end
  end

  // ----------------------------------------------------------------- playback
  logic [IW-1:0]      spill_idx;
  logic               spill_done, missed;
  logic               pb_rd_en, pb_wr_en;
  logic [IW+SW-1:0]   pb_rd_addr;
  logic [13:0]        pb_wr_addr;
  logic [15:0]        pb_wr_data;
  logic [DAC_W-1:0]   pb_rd_data, ref_val;
  logic [15:0]        tick_count;
  logic               ref_valid, playing, pb_done, pb_tick;

  spill_sequencer #(.NUM_SPILLS(NSPILL)) u_seq (
    .clk, .rst_n, .cycle_start, .spill_event, .spill_done,
    .spill_idx, .spill_go, .spill_active, .missed
  );

  dp_ram #(.DW(DAC_W), .DEPTH(NSPILL * SLEN)) u_pb_mem (
    .clk,
    .wr_en(pb_wr_en), .wr_addr((IW+SW)'(pb_wr_addr)), .wr_data(DAC_W'(pb_wr_data)),
    .rd_en(pb_rd_en), .rd_addr(pb_rd_addr), .rd_data(pb_rd_data)
  );

  playback_generator #(.DAC_W(DAC_W), .NUM_SPILLS(NSPILL), .SPILL_LEN(SLEN)) u_pb (
    .clk, .rst_n, .spill_go, .spill_idx,
    .cfg_tick_period(cfg.tick_period), .cfg_spill_len(cfg.spill_len),
    .mem_rd_en(pb_rd_en), .mem_rd_addr(pb_rd_addr), .mem_rd_data(pb_rd_data),
    .tick(pb_tick), .tick_count, .ref_out(ref_val), .ref_valid, .playing, .done(pb_done)
  );

  // A tick that coincides with spill_go belongs to the free-running timer
  // before its restart; it is not a tick of the new spill.
  assign tick = pb_tick & ~spill_go;

  // --------------------------------------------------------------- controller
  logic signed [CORR_W-1:0] corr;
  logic                     corr_valid;
  logic signed [31:0]       err;
  logic signed [SUM_W-1:0]  fb_meas;

  assign fb_meas = cfg.fb_src_circ ? ma_c : ma_e;

  pid_controller #(.IN_W(SUM_W), .CORR_W(CORR_W)) u_pid (
    .clk, .rst_n, .clear(spill_go), .enable(cfg.fb_enable && spill_active),
    .tick, .intensity(fb_meas), .setpoint(cfg.setpoint),
    .kp(cfg.kp), .ki(cfg.ki), .kd(cfg.kd),
    .corr, .corr_valid, .err
  );

  // ------------------------------------------------------------- conditioning
  logic [1:0] abort_sync;
  logic       abort, slew_limited, timed_out, aborted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) abort_sync <= '0;
    else        abort_sync <= {abort_sync[0], abort_in};
  end
  assign abort = abort_sync[1] | cfg.soft_abort;

  spill_conditioning #(.DW(DAC_W), .CW(CORR_W)) u_cond (
    .clk, .rst_n, .spill_go, .abort_req(abort), .tick_count, .ref_in(ref_val), .corr,
    .cfg_slew_max(cfg.slew_max), .cfg_ramp_step(cfg.ramp_step),
    .cfg_rate_div(cfg.rate_div), .cfg_timeout(cfg.timeout),
    .dac(dac_quad), .state(cond_state), .spill_done,
    .slew_limited, .timed_out, .aborted
  );

  // ------------------------------------------------------------------ logging
  logic              tick_d, log_rd_en, log_full;
  logic signed [SUM_W-1:0] meas_at_tick;
  logic [10:0]       log_rd_addr;
  logic [SUM_W-1:0]  log_int_data;
  logic [CORR_W-1:0] log_corr_data;
  logic [LW:0]       log_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_d       <= 1'b0;
      meas_at_tick <= '0;
    end else begin
      tick_d <= tick;
      // the value the PID sampled on this tick, so that each log entry pairs
      // a correction with the intensity it was computed from
      if (tick) meas_at_tick <= fb_meas;
    end
  end

  spill_logger #(.INT_W(SUM_W), .CORR_W(CORR_W), .LOG_DEPTH(LDEPTH)) u_log (
    .clk, .rst_n, .spill_go, .active(spill_active), .strobe(tick_d),
    .intensity(meas_at_tick), .corr(corr),
    .host_rd_en(log_rd_en), .host_rd_addr(LW'(log_rd_addr)),
    .host_int_data(log_int_data), .host_corr_data(log_corr_data),
    .count(log_count), .full(log_full)
  );

  // --------------------------------------------------------------------- host
  logic [31:0] status;
  logic        sticky_missed, sticky_timeout, sticky_abort, sticky_slew, sticky_pb_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sticky_missed  <= 1'b0;
      sticky_timeout <= 1'b0;
      sticky_abort   <= 1'b0;
      sticky_slew    <= 1'b0;
      sticky_pb_done <= 1'b0;
    end else if (spill_go) begin
      sticky_missed  <= 1'b0;
      sticky_timeout <= 1'b0;
      sticky_abort   <= 1'b0;
      sticky_slew    <= 1'b0;
      sticky_pb_done <= 1'b0;
    end else begin
      sticky_missed  <= sticky_missed  | missed;
      sticky_timeout <= sticky_timeout | timed_out;
      sticky_abort   <= sticky_abort   | aborted;
      sticky_slew    <= sticky_slew    | slew_limited;
      sticky_pb_done <= sticky_pb_done | pb_done;
    end
  end

  // STATUS: [0] spill active, [1] playing, [3:2] conditioning state,
  // [6:4] spill index, [7] log full, [8] timed out, [9] aborted,
  // [10] missed spill event, [11] slew limiter acted, [12] waveform played
  // to its end, [27:16] log entries written
  assign status = {4'd0, 12'(log_count), 3'd0, sticky_pb_done, sticky_slew, sticky_missed, sticky_abort,
                   sticky_timeout, log_full, 3'(spill_idx), cond_state, playing,
                   spill_active};

  config_regs #(.PB_AW(14), .LOG_AW(11), .IW(SUM_W), .CW(CORR_W)) u_regs (
    .clk, .rst_n,
    .avs_address, .avs_write, .avs_writedata, .avs_read,
    .avs_readdata, .avs_readdatavalid,
    .cfg,
    .pb_wr_en, .pb_wr_addr, .pb_wr_data,
    .log_rd_en, .log_rd_addr, .log_int_data, .log_corr_data,
    .status, .int_extr(32'(ma_e)), .int_circ(32'(ma_c)), .pid_err(err)
  );

endmodule
