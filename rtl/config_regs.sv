// config_regs: host register file ("User Config") and FPGA memory map.
//
// The board's ARM processor reaches the fabric over an Avalon-MM bridge;
// Linux software (and through it the control system) writes settings and
// reference waveforms and reads back the logs. This block is the Avalon-MM
// slave behind that bridge. Word address bits [15:14] select a region:
//   00  registers (srs_pkg::REG_*), settings read back as written
//   01  playback memory, write only: address[13:0] = {spill, sample}
//   10  intensity log, read only: address[10:0] = sample
//   11  correction log, read only: address[10:0] = sample
// Writes take effect on the clock they are presented. Reads have a fixed
// latency of two clocks: readdatavalid pulses two clocks after read
// (one clock for the log memory, one for the output register). There is no
// waitrequest. Reading the playback region returns zero.
//
// The paper has a memory-mapped "FPGA Mem / User Config" block reached from
// the ARM cores over Avalon/AXI bridges; the register map, widths, reset
// values and the fixed read latency are this design's choices. Reset values
// give the 10 kHz tick (12500 clocks), a 32-sample (256 ns) integration window
// and feedback off.
//
// Playback writes and log read addresses go to the memories straight from
// the bus, without a register stage, so those outputs follow the inputs
// combinationally. All flops reset asynchronously; lint may report rst_n as
// also used synchronously, which is only the assertion's disable iff.
module config_regs
  import srs_pkg::*;
#(
  parameter int unsigned PB_AW  = 14,
  parameter int unsigned LOG_AW = 11,
  parameter int unsigned IW  = 24,
  parameter int unsigned CW = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // Avalon-MM slave
  input  logic [BUS_AW-1:0]   avs_address,
  input  logic                avs_write,
  input  logic [31:0]         avs_writedata,
  input  logic                avs_read,
  output logic [31:0]         avs_readdata,
  output logic                avs_readdatavalid,
  // settings
  output srs_cfg_t            cfg,
  // playback memory write port
  output logic                pb_wr_en,
  output logic [PB_AW-1:0]    pb_wr_addr,
  output logic [15:0]         pb_wr_data,
  // log memory read port
  output logic                log_rd_en,
  output logic [LOG_AW-1:0]   log_rd_addr,
  input  logic [IW-1:0]    log_int_data,
  input  logic [CW-1:0]   log_corr_data,
  // status
  input  logic [31:0]         status,
  input  logic [31:0]         int_extr,
  input  logic [31:0]         int_circ,
  input  logic [31:0]         pid_err
);

  region_e     wr_region, rd_region, rd_region_q;
  logic [7:0]  rd_reg_q;
  logic        rd_q;
  logic [31:0] reg_rdata;

  assign wr_region = region_e'(avs_address[15:14]);
  assign rd_region = region_e'(avs_address[15:14]);

  // register writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg             <= '0;
      cfg.tick_period <= 16'(TICK_PERIOD);
      cfg.trig_delay  <= 16'd2;
      cfg.win_len     <= 16'd32;
      cfg.base_delay  <= 16'd120;
      cfg.slew_max    <= 16'd64;
      cfg.ramp_step   <= 16'd16;
      cfg.rate_div    <= 16'd125;
      cfg.timeout     <= 16'(SPILL_LEN);
      cfg.spill_len   <= 16'(SPILL_LEN);
    end else if (avs_write && wr_region == REGION_REGS) begin
      unique case (avs_address[7:0])
        REG_CTRL:       {cfg.soft_abort, cfg.fb_src_circ, cfg.fb_enable} <= avs_writedata[2:0];
        REG_TICK_PER:   cfg.tick_period <= avs_writedata[15:0];
        REG_TRIG_DELAY: cfg.trig_delay  <= avs_writedata[15:0];
        REG_WIN_LEN:    cfg.win_len     <= avs_writedata[15:0];
        REG_BASE_DELAY: cfg.base_delay  <= avs_writedata[15:0];
        REG_SETPOINT:   cfg.setpoint    <= avs_writedata[SUM_W-1:0];
        REG_KP:         cfg.kp          <= avs_writedata[15:0];
        REG_KI:         cfg.ki          <= avs_writedata[15:0];
        REG_KD:         cfg.kd          <= avs_writedata[15:0];
        REG_SLEW_MAX:   cfg.slew_max    <= avs_writedata[15:0];
        REG_RAMP_STEP:  cfg.ramp_step   <= avs_writedata[15:0];
        REG_RATE_DIV:   cfg.rate_div    <= avs_writedata[15:0];
        REG_TIMEOUT:    cfg.timeout     <= avs_writedata[15:0];
        REG_SPILL_LEN:  cfg.spill_len   <= avs_writedata[15:0];
        default: ;
      endcase
    end
  end

  // playback memory writes
  always_comb begin
    pb_wr_en   = avs_write && wr_region == REGION_PLAYBACK;
    pb_wr_addr = avs_address[PB_AW-1:0];
    pb_wr_data = avs_writedata[15:0];
  end

  // log reads
  always_comb begin
    log_rd_en   = avs_read && (rd_region == REGION_LOG_INT || rd_region == REGION_LOG_CORR);
    log_rd_addr = avs_address[LOG_AW-1:0];
  end

  always_comb begin
    unique case (rd_reg_q)
      REG_CTRL:       reg_rdata = {29'd0, cfg.soft_abort, cfg.fb_src_circ, cfg.fb_enable};
      REG_TICK_PER:   reg_rdata = {16'd0, cfg.tick_period};
      REG_TRIG_DELAY: reg_rdata = {16'd0, cfg.trig_delay};
      REG_WIN_LEN:    reg_rdata = {16'd0, cfg.win_len};
      REG_BASE_DELAY: reg_rdata = {16'd0, cfg.base_delay};
      REG_SETPOINT:   reg_rdata = 32'(cfg.setpoint);
      REG_KP:         reg_rdata = {16'd0, cfg.kp};
      REG_KI:         reg_rdata = {16'd0, cfg.ki};
      REG_KD:         reg_rdata = {16'd0, cfg.kd};
      REG_SLEW_MAX:   reg_rdata = {16'd0, cfg.slew_max};
      REG_RAMP_STEP:  reg_rdata = {16'd0, cfg.ramp_step};
      REG_RATE_DIV:   reg_rdata = {16'd0, cfg.rate_div};
      REG_TIMEOUT:    reg_rdata = {16'd0, cfg.timeout};
      REG_SPILL_LEN:  reg_rdata = {16'd0, cfg.spill_len};
      REG_STATUS:     reg_rdata = status;
      REG_INT_EXTR:   reg_rdata = int_extr;
      REG_INT_CIRC:   reg_rdata = int_circ;
      REG_PID_ERR:    reg_rdata = pid_err;
      default:        reg_rdata = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q              <= 1'b0;
      rd_reg_q          <= '0;
      rd_region_q       <= REGION_REGS;
      avs_readdata      <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      rd_q              <= avs_read;
      rd_reg_q          <= avs_address[7:0];
      rd_region_q       <= rd_region;
      avs_readdatavalid <= rd_q;
      if (rd_q) begin
        unique case (rd_region_q)
          REGION_REGS:     avs_readdata <= reg_rdata;
          REGION_PLAYBACK: avs_readdata <= 32'd0;
          REGION_LOG_INT:  avs_readdata <= 32'($signed(log_int_data));
          REGION_LOG_CORR: avs_readdata <= 32'($signed(log_corr_data));
          default:         avs_readdata <= 32'd0;
        endcase
      end
    end
  end

  // A host cycle is either a read or a write.
  a_rw_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(avs_read && avs_write));

endmodule
