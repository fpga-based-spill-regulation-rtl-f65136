// playback_generator: spill playback generator with its 10 kHz timer.
//
// A down-counting timer issues a one-clock tick every tick_period clocks
// (12500 clocks of 125 MHz = 10 kHz by default). spill_go restarts the
// timer so that the first tick of a spill comes two clocks after spill_go and
// every spill is played with the same phase. For each tick while a spill is
// playing, the generator reads sample k of the selected spill from the
// playback memory (address {spill_idx, k}) and presents it on ref one clock
// later (the memory read takes one clock, so ref changes two clocks after
// the tick). After spill_len samples it stops, holds the last sample and
// pulses done. tick_count counts the ticks since spill_go (saturating) and is
// used for the spill timeout and the log address.
//
// Follows the paper: reference waveforms stored per spill in on-board memory,
// played back at 10 kHz by a configurable internal timer. This design's own
// choices: the restart of the timer on spill_go, holding the last sample,
// and treating a spill_len of 0 or above SPILL_LEN as SPILL_LEN.
module playback_generator #(
  parameter int unsigned DAC_W      = 16,
  parameter int unsigned NUM_SPILLS = 8,
  parameter int unsigned SPILL_LEN  = 2048,
  parameter int unsigned IW         = $clog2(NUM_SPILLS),
  parameter int unsigned SW         = $clog2(SPILL_LEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                spill_go,
  input  logic [IW-1:0]       spill_idx,
  input  logic [15:0]         cfg_tick_period,
  input  logic [15:0]         cfg_spill_len,
  // playback memory read port
  output logic                mem_rd_en,
  output logic [IW+SW-1:0]    mem_rd_addr,
  input  logic [DAC_W-1:0]    mem_rd_data,
  // outputs
  output logic                tick,
  output logic [15:0]         tick_count,
  output logic [DAC_W-1:0]    ref_out,
  output logic                ref_valid,
  output logic                playing,
  output logic                done
);

  logic [15:0] tmr;
  logic [SW:0] k, len;
  logic        rd_q;

  always_comb begin
    if (cfg_spill_len == 16'd0 || 32'(cfg_spill_len) > SPILL_LEN) len = (SW+1)'(SPILL_LEN);
    else                                                         len = (SW+1)'(cfg_spill_len);
  end

  // 10 kHz timer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmr  <= '0;
      tick <= 1'b0;
    end else if (spill_go) begin
      tmr  <= '0;
      tick <= 1'b0;
    end else if (tmr == 16'd0) begin
      tmr  <= (cfg_tick_period == 16'd0) ? 16'd0 : cfg_tick_period - 16'd1;
      tick <= 1'b1;
    end else begin
      tmr  <= tmr - 16'd1;
      tick <= 1'b0;
    end
  end

  always_comb begin
    mem_rd_en   = tick && playing;
    mem_rd_addr = {spill_idx, k[SW-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k          <= '0;
      playing    <= 1'b0;
      done       <= 1'b0;
      rd_q       <= 1'b0;
      ref_out    <= '0;
      ref_valid  <= 1'b0;
      tick_count <= '0;
    end else begin
      done      <= 1'b0;
      rd_q      <= mem_rd_en;
      ref_valid <= rd_q;
      if (rd_q) ref_out <= mem_rd_data;
      if (spill_go) begin
        k          <= '0;
        playing    <= 1'b1;
        tick_count <= '0;
      end else begin
        if (tick && tick_count != 16'hFFFF) tick_count <= tick_count + 16'd1;
        if (tick && playing) begin
          if (k == len - 1'b1) begin
            playing <= 1'b0;
            done    <= 1'b1;
          end
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
