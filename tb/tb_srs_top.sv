// tb_srs_top: end-to-end test of the spill regulation system.
//
// Reduced sizes: 32-sample spills, 32-entry logs, 4-bunch moving average,
// and a tick every 424 clocks (two bunches per tick) so that a spill lasts
// about 17,000 clocks. The testbench is the host (Avalon-MM master), the
// accelerator timing (RF marker every 212 clocks, cycle/spill events,
// abort) and the beam monitors: each ADC carries a constant baseline plus an
// 8-sample pulse after every marker edge, so the baseline-corrected bunch
// integral is exactly 8 x pulse height whatever the baseline.
//
// Spills played, each checked against values computed here:
//   1  feedback off: the DAC code equals each stored sample, spill ends by
//      timeout; intensity and correction logs read back, log full.
//   2  feedback on (kp = 1.0): the correction equals setpoint - intensity
//      and the DAC code equals reference + correction; ended by the abort
//      pin, ramp-down monotone to zero.
//   3  small slew limit: every DAC step within the limit; a spill event
//      during the spill is reported missed; ended by the host soft abort.
//   4  feedback on the circulating monitor (mode switch).
//   5+ short spills until the spill index wraps from 7 to 0.
// The diagnostic replay output is checked against the bunch integral.
// Each mechanism is counted and one that never happened is a failure.
module tb_srs_top;
  import srs_pkg::*;
  localparam int SL = 32, LD = 32, TP = 424;
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

  // mechanism counters
  int n_play = 0, n_fb = 0, n_slew = 0, n_abort_pin = 0, n_soft_abort = 0, n_timeout = 0;
  int n_missed = 0, n_log_full = 0, n_wrap = 0, n_circ = 0, n_baseline = 0, n_ramp = 0, n_diag = 0;

  srs_top #(.SLEN(SL), .LDEPTH(LD), .MA_LOG2(2)) dut (
    .clk, .rst_n, .adc_circ, .adc_extr, .rf_marker, .cycle_start, .spill_event, .abort_in,
    .dac_quad, .dac_diag, .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata, .avs_readdatavalid,
    .spill_active, .tick, .cond_state);

  always #4 clk = ~clk;

  // ---------------------------------------------------------------- beam model
  localparam int H_E = 50, B_E = -300, H_C = 200, B_C = 1000;
  localparam int AREA_E = 8 * H_E, AREA_C = 8 * H_C;
  int phase = 0;
  always @(negedge clk) begin
    phase = (phase + 1) % 212;
    rf_marker = (phase < 106);
    adc_extr = 14'(B_E + ((phase >= 8 && phase < 16) ? H_E : 0));
    adc_circ = 14'(B_C + ((phase >= 8 && phase < 16) ? H_C : 0));
  end

  // ------------------------------------------------------------------- host
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
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

  function automatic logic [15:0] regaddr(input logic [7:0] r);
    return {8'h00, r};
  endfunction

  function automatic int refval(input int s, input int k);
    return 1000 + s * 3000 + k * 100;
  endfunction

  function automatic int clampdac(input int v);
    return v < 0 ? 0 : (v > 65535 ? 65535 : v);
  endfunction

  // record the DAC code five clocks after each tick of the running spill
  int dac_at_tick [$];
  int prev_dac = 0, max_step = 0;
  bit ramp_monotone = 1;
  always @(negedge clk) begin
    if (tick && spill_active) fork begin
      repeat (5) @(negedge clk);
      dac_at_tick.push_back(int'(dac_quad));
    end join_none
  end
  always @(negedge clk) begin
    int st;
    st = int'(dac_quad) - prev_dac;
    if (st < 0) st = -st;
    if (cond_state == COND_RUN && st > max_step) max_step = st;
    if (cond_state == COND_RAMP && int'(dac_quad) > prev_dac) begin
      ramp_monotone = 0;
    end
    prev_dac = int'(dac_quad);
  end

  task automatic start_spill(input bit cyc);
    dac_at_tick.delete();
    max_step = 0;
    ramp_monotone = 1;
    @(negedge clk); spill_event = 1; cycle_start = cyc;
    @(negedge clk); spill_event = 0; cycle_start = 0;
  endtask

  task automatic wait_ticks(input int n);
    for (int i = 0; i < n; i++) @(posedge tick);
    @(negedge clk);
  endtask

  task automatic wait_end();
    int guard = 0;
    while (spill_active && guard < 200000) begin @(negedge clk); guard++; end
    chk(!spill_active, "spill did not end");
    chk(dac_quad == 16'd0, "DAC not at zero after the spill");
  endtask

  task automatic read_logs(output int li [], output int lc []);
    logic [31:0] d;
    li = new[LD]; lc = new[LD];
    for (int i = 0; i < LD; i++) begin
      rd({2'b10, 14'(i)}, d); li[i] = int'($signed(d));
      rd({2'b11, 14'(i)}, d); lc[i] = int'($signed(d));
    end
  endtask

  initial begin
    logic [31:0] d;
    int li [], lc [];
    int idx;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    // configuration
    for (int s = 0; s < 8; s++)
      for (int k = 0; k < SL; k++) wr({2'b01, 14'(s * SL + k)}, 32'(refval(s, k)));
    wr(regaddr(REG_TICK_PER), TP);
    wr(regaddr(REG_TRIG_DELAY), 0);
    wr(regaddr(REG_WIN_LEN), 32);
    wr(regaddr(REG_BASE_DELAY), 100);
    wr(regaddr(REG_SPILL_LEN), SL);
    wr(regaddr(REG_TIMEOUT), 40);
    wr(regaddr(REG_RATE_DIV), 1);
    wr(regaddr(REG_SLEW_MAX), 65535);
    wr(regaddr(REG_RAMP_STEP), 4000);
    wr(regaddr(REG_SETPOINT), 1400);
    wr(regaddr(REG_KP), 256);
    wr(regaddr(REG_CTRL), 0);
    // a new update divider takes effect when the running count expires
    repeat (200) @(negedge clk);

    // ---- spill 1: open-loop playback, timeout
    start_spill(1);
    wait_end();
    chk(dac_at_tick.size() >= SL, "too few ticks in spill 1");
    for (int k = 0; k < SL && k < dac_at_tick.size(); k++) begin
      chk(dac_at_tick[k] == refval(0, k), $sformatf("spill 1 tick %0d: dac %0d expected %0d", k, dac_at_tick[k], refval(0, k)));
      if (dac_at_tick[k] == refval(0, k)) n_play++;
    end
    chk(ramp_monotone, "ramp-down not monotone");
    n_ramp++;
    rd(regaddr(REG_STATUS), d);
    chk(d[8] && !d[9], "spill 1 not ended by timeout");
    if (d[8]) n_timeout++;
    chk(d[7] && d[27:16] == 12'(LD), "log not full after spill 1");
    if (d[7]) n_log_full++;
    rd(regaddr(REG_INT_EXTR), d);
    chk(int'($signed(d)) == AREA_E, $sformatf("extracted intensity %0d expected %0d", $signed(d), AREA_E));
    rd(regaddr(REG_INT_CIRC), d);
    chk(int'($signed(d)) == AREA_C, $sformatf("circulating intensity %0d expected %0d", $signed(d), AREA_C));
    if (int'($signed(d)) == AREA_C) n_baseline++;
    chk(int'(dac_diag) == AREA_E, $sformatf("diagnostic replay %0d expected %0d", dac_diag, AREA_E));
    if (int'(dac_diag) == AREA_E) n_diag++;
    read_logs(li, lc);
    for (int k = 3; k < LD; k++) begin
      chk(li[k] == AREA_E, $sformatf("intensity log[%0d] %0d", k, li[k]));
      chk(lc[k] == 0, "correction logged with feedback off");
    end

    // ---- spill 2: closed loop on extracted beam, abort pin
    wr(regaddr(REG_CTRL), 1);
    start_spill(0);
    wait_ticks(20);
    abort_in = 1;
    repeat (5) @(negedge clk);
    abort_in = 0;
    wait_end();
    rd(regaddr(REG_STATUS), d);
    chk(d[9] && !d[8], "spill 2 not ended by abort");
    if (d[9]) n_abort_pin++;
    chk(ramp_monotone, "ramp-down not monotone");
    n_ramp++;
    read_logs(li, lc);
    for (int k = 0; k < 19; k++) begin
      chk(lc[k] == 1400 - li[k], $sformatf("corr log[%0d] %0d vs intensity %0d", k, lc[k], li[k]));
      chk(dac_at_tick[k] == clampdac(refval(1, k) + lc[k]), $sformatf("spill 2 tick %0d: dac %0d expected %0d", k, dac_at_tick[k], clampdac(refval(1, k) + lc[k])));
      if (k >= 3 && lc[k] == 1400 - AREA_E) n_fb++;
    end

    // ---- spill 3: slew limit, missed event, soft abort
    wr(regaddr(REG_SLEW_MAX), 50);
    wr(regaddr(REG_CTRL), 0);
    start_spill(0);
    wait_ticks(5);
    @(negedge clk); spill_event = 1; @(negedge clk); spill_event = 0;
    wait_ticks(3);
    chk(max_step <= 50, $sformatf("DAC step %0d above slew limit", max_step));
    chk(int'(dac_quad) < refval(2, 7), "slew limiter not limiting");
    if (max_step == 50) n_slew++;
    wr(regaddr(REG_CTRL), 4);
    wait_end();
    rd(regaddr(REG_STATUS), d);
    chk(d[10], "missed spill event not reported");
    if (d[10]) n_missed++;
    chk(d[9], "soft abort not reported");
    if (d[9]) n_soft_abort++;
    wr(regaddr(REG_CTRL), 0);
    wr(regaddr(REG_SLEW_MAX), 65535);

    // ---- spill 4: regulate on the circulating monitor
    wr(regaddr(REG_CTRL), 3);
    start_spill(0);
    wait_end();
    read_logs(li, lc);
    for (int k = 3; k < SL; k++) begin
      chk(li[k] == AREA_C && lc[k] == 1400 - AREA_C, $sformatf("circ mode log[%0d] %0d %0d", k, li[k], lc[k]));
      chk(dac_at_tick[k] == clampdac(refval(3, k) + 1400 - AREA_C), "circ mode dac");
      if (lc[k] == 1400 - AREA_C) n_circ++;
    end
    wr(regaddr(REG_CTRL), 0);

    // ---- spills 5..: run until the index wraps
    wr(regaddr(REG_TIMEOUT), 3);
    for (int s = 4; s < 10; s++) begin
      start_spill(0);
      wait_ticks(1);
      rd(regaddr(REG_STATUS), d);
      idx = int'(d[6:4]);
      chk(idx == s % 8, $sformatf("spill index %0d expected %0d", idx, s % 8));
      if (s >= 8 && idx == s % 8) n_wrap++;
      wait_end();
    end

    checks++;
    if (n_play == 0 || n_fb == 0 || n_slew == 0 || n_abort_pin == 0 || n_soft_abort == 0 || n_timeout == 0 ||
        n_missed == 0 || n_log_full == 0 || n_wrap == 0 || n_circ == 0 || n_baseline == 0 || n_ramp == 0 || n_diag == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("mechanisms: playback=%0d feedback=%0d slew=%0d abort_pin=%0d soft_abort=%0d timeout=%0d missed=%0d log_full=%0d wrap=%0d circ_mode=%0d baseline=%0d ramp=%0d diag=%0d",
             n_play, n_fb, n_slew, n_abort_pin, n_soft_abort, n_timeout, n_missed, n_log_full, n_wrap, n_circ, n_baseline, n_ramp, n_diag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
