// tb_srs_full: one complete spill through the system at full size.
//
// No parameter of the top is changed: eight 2048-sample spill buffers,
// 2048-entry logs, a 64-bunch moving average, and the reset settings of the
// registers (tick every 12500 clocks = 10 kHz at 125 MHz, 32-sample window,
// slew limit 64 codes per microsecond, ramp-down 16 codes per microsecond,
// timeout after 2048 ticks). The host uploads a logarithmic reference curve,
//   ref[k] = 2000 + round(8000 * ln(1 + k/64)),
// like the curve used to test the playback path on the real machine, turns
// on the PID (kp = 0.5, ki = 2/256, kd = 0.25) and starts the spill.
// The beam monitors carry a 24-sample (192 ns) triangular pulse on a
// constant baseline every 212 clocks (1695 ns); the bunch intensity varies
// at random by up to +-50 % from bunch to bunch (the spread quoted for the
// Delivery Ring bunches).
//
// Checked: 2048 ticks 12500 clocks apart; the DAC code 6000 clocks after
// each tick equals reference + the logged correction (after the first tick,
// whose jump from zero is slew limited); the logged intensity lies within
// +-50 % of the nominal pulse area; every logged correction equals a PID computed here
// from the logged intensities; the log is full; the spill ends by timeout
// and the ramp-down takes the DAC code to zero.
module tb_srs_full;
  import srs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] adc_circ = '0, adc_extr = '0;
  logic rf_marker = 0, cycle_start = 0, spill_event = 0, abort_in = 0;
  logic [15:0] dac_quad;
  logic signed [15:0] dac_diag;
  logic [15:0] avs_address = '0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic avs_readdatavalid, spill_active, tick;
  cond_state_e cond_state;
  int checks = 0, failures = 0;

  srs_top dut (
    .clk, .rst_n, .adc_circ, .adc_extr, .rf_marker, .cycle_start, .spill_event, .abort_in,
    .dac_quad, .dac_diag, .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata, .avs_readdatavalid,
    .spill_active, .tick, .cond_state);

  always #4 clk = ~clk;

  // beam: triangle of 24 samples, peak 240, baseline -150 (extracted) / 600 (circulating)
  localparam int BE = -150, BC = 600;
  function automatic int tri_pulse(input int ph);
    int x;
    if (ph < 8 || ph >= 32) return 0;
    x = ph - 8;               // 0..23
    return (x < 12) ? 20 * (x + 1) : 20 * (24 - x);
  endfunction
  int area = 0;
  int phase = 0;
  int amp = 100;   // bunch intensity in percent of nominal
  always @(negedge clk) begin
    phase = (phase + 1) % 212;
    if (phase == 0) amp = 50 + $urandom_range(100);
    rf_marker = (phase < 106);
    adc_extr = 14'(BE + tri_pulse(phase) * amp / 100);
    adc_circ = 14'(BC + 2 * tri_pulse(phase) * amp / 100);
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); avs_address = a; avs_writedata = d; avs_write = 1;
    @(negedge clk); avs_write = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); avs_address = a; avs_read = 1;
    @(negedge clk); avs_read = 0;
    @(negedge clk);
    d = avs_readdata;
  endtask

  int refv [SPILL_LEN];
  int dac_seen [$];
  longint tick_time [$];
  longint cyc = 0;
  always @(negedge clk) begin
    cyc++;
    if (tick && spill_active) begin
      tick_time.push_back(cyc);
      fork begin
        repeat (6000) @(negedge clk);
        dac_seen.push_back(int'(dac_quad));
      end join_none
    end
  end

  initial begin
    logic [31:0] d;
    int li, lc, e, eprev, u, kp, ki, kd, n;
    int li_prev = 0, n_vary = 0;
    longint integ, uu;
    for (int i = 0; i < 24; i++) area += tri_pulse(i + 8);
    for (int k = 0; k < SPILL_LEN; k++) refv[k] = 2000 + int'($floor(8000.0 * $ln(1.0 + real'(k) / 64.0) + 0.5));
    repeat (5) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < SPILL_LEN; k++) wr({2'b01, 14'(k)}, 32'(refv[k]));
    kp = 128; ki = 2; kd = 64;
    wr({8'h00, REG_SETPOINT}, 32'(area + 50));
    wr({8'h00, REG_KP}, 32'(kp));
    wr({8'h00, REG_KI}, 32'(ki));
    wr({8'h00, REG_KD}, 32'(kd));
    wr({8'h00, REG_CTRL}, 32'd1);
    repeat (300) @(negedge clk);
    @(negedge clk); spill_event = 1; cycle_start = 1;
    @(negedge clk); spill_event = 0; cycle_start = 0;
    n = 0;
    while (spill_active && n < 40_000_000) begin @(negedge clk); n++; end
    chk(!spill_active && dac_quad == 16'd0, "spill did not end with the DAC at zero");
    rd({8'h00, REG_STATUS}, d);
    chk(d[8] && !d[9], "spill not ended by timeout");
    chk(d[7] && d[27:16] == 12'(LOG_DEPTH), "log not full");
    chk(tick_time.size() >= SPILL_LEN, $sformatf("%0d ticks", tick_time.size()));
    for (int k = 1; k < SPILL_LEN; k++)
      chk(tick_time[k] - tick_time[k-1] == TICK_PERIOD, "tick spacing not 12500 clocks");
    integ = 0; eprev = 0;
    for (int k = 0; k < LOG_DEPTH; k++) begin
      rd({2'b10, 14'(k)}, d); li = int'($signed(d));
      rd({2'b11, 14'(k)}, d); lc = int'($signed(d));
      if (k >= 2) chk(li >= area / 2 && li <= area * 3 / 2, $sformatf("intensity log[%0d] = %0d, pulse area %0d", k, li, area));
      if (k >= 2 && li != li_prev) n_vary++;
      li_prev = li;
      e = area + 50 - li;
      integ += e;
      uu = (longint'(kp) * e + longint'(ki) * integ + longint'(kd) * (e - eprev)) >>> 8;
      eprev = e;
      u = (uu > 32767) ? 32767 : (uu < -32768) ? -32768 : int'(uu);
      chk(lc == u, $sformatf("correction log[%0d] = %0d, PID model %0d", k, lc, u));
      if (k == 0)
        // the first step (0 to ref + corr) is slew limited: 6000 clocks = 48 updates of 64 codes
        chk(dac_seen[0] >= 47 * 64 && dac_seen[0] <= 48 * 64 && dac_seen[0] < refv[0] + lc,
            $sformatf("first tick: dac %0d not slew limited", dac_seen[0]));
      else if (k < SPILL_LEN - 1)
        // the last tick is cut short: the timeout (2048 ticks) starts the ramp-down at once
        chk(dac_seen[k] == refv[k] + lc, $sformatf("tick %0d: dac %0d expected %0d", k, dac_seen[k], refv[k] + lc));
    end
    chk(n_vary > LOG_DEPTH / 2, "logged intensity does not follow the bunch-to-bunch variation");
    $display("pulse area %0d, final correction %0d, last reference %0d", area, lc, refv[SPILL_LEN-1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
