// bunch_integrator: fast bunch integration of one beam-monitor ADC channel.
//
// The Delivery Ring delivers one proton micro-bunch every 1695 ns, about
// 200 ns wide. An external RF marker (589 kHz) marks each bunch. On every
// rising edge of the marker the block starts a sample counter; the signed
// ADC samples whose count lies in [trig_delay, trig_delay + win_len) are
// summed into the signal integral. Because the monitors are AC coupled
// their baseline wanders, so a second window of the same length, starting
// base_delay samples after the marker (set it into the empty gap between
// bunches), is summed as well and subtracted. The difference is the bunch
// intensity in raw ADC-sum units.
//
// Follows the paper: a trigger from the RF marker, a fixed window after a set
// delay, every ADC sample in the window summed, baseline correction. This
// design's own choices: triggering on the rising edge of the marker, the
// two-flop synchronizer, and the baseline method (an equal-length window
// in the gap, subtracted).
//
// Interface: adc is sampled every clk. integral/integral_valid: the
// corrected sum and a one-cycle strobe, issued on the cycle after the later
// of the two windows closes. A marker edge that arrives while a bunch is
// still being integrated restarts the integration (that bunch is dropped).
// win_len must be 1 .. 2^(SUM_W-ADC_W) so that the sums cannot overflow.
//
// Timing: the marker passes a two-flop synchronizer and an edge detector,
// so the sample counted as 0 is the one present three clocks after the
// marker edge reaches the pin; trig_delay absorbs that offset.
module bunch_integrator #(
  parameter int unsigned ADC_W = 14,
  parameter int unsigned SUM_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc,
  input  logic                    rf_marker,
  input  logic [15:0]             cfg_trig_delay,
  input  logic [15:0]             cfg_win_len,
  input  logic [15:0]             cfg_base_delay,
  output logic signed [SUM_W-1:0] integral,
  output logic                    integral_valid,
  output logic                    busy
);

  logic [2:0]  mk_sync;
  logic        trig;
  logic [16:0] cnt;
  logic        active;
  logic signed [SUM_W-1:0] sig_sum, base_sum;
  logic [16:0] sig_end, base_end, last;
  logic        in_sig, in_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mk_sync <= '0;
    else        mk_sync <= {mk_sync[1:0], rf_marker};
  end
  assign trig = mk_sync[1] & ~mk_sync[2];

  always_comb begin
    sig_end  = {1'b0, cfg_trig_delay} + {1'b0, cfg_win_len};
    base_end = {1'b0, cfg_base_delay} + {1'b0, cfg_win_len};
    last     = (sig_end > base_end) ? sig_end : base_end;
    in_sig   = (cnt >= {1'b0, cfg_trig_delay}) && (cnt < sig_end);
    in_base  = (cnt >= {1'b0, cfg_base_delay}) && (cnt < base_end);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt            <= '0;
      active         <= 1'b0;
      sig_sum        <= '0;
      base_sum       <= '0;
      integral       <= '0;
      integral_valid <= 1'b0;
    end else begin
      integral_valid <= 1'b0;
      if (trig) begin
        active   <= 1'b1;
        cnt      <= '0;
        sig_sum  <= '0;
        base_sum <= '0;
      end else if (active) begin
        if (cnt == last) begin
          active         <= 1'b0;
          integral       <= sig_sum - base_sum;
          integral_valid <= 1'b1;
        end else begin
          cnt <= cnt + 17'd1;
          if (in_sig)  sig_sum  <= sig_sum  + SUM_W'(adc);
          if (in_base) base_sum <= base_sum + SUM_W'(adc);
        end
      end
    end
  end

  assign busy = active;

endmodule
