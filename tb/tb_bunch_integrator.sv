// tb_bunch_integrator: self-checking test of the fast bunch integrator.
//
// Drives a synthetic beam-monitor signal: a wandering baseline plus a
// triangular proton pulse after every RF marker edge (212 clocks apart,
// 1695 ns at 125 MHz), with random noise. The testbench keeps every sample
// it drove, indexed by the clock edge that samples it, and computes the
// expected integral itself: the sum over the signal window minus the sum
// over the baseline window, both counted from the third clock edge after
// the marker is raised. It checks the value and the clock edge on which the
// result strobe appears, for several delay/window settings, and a retrigger
// that arrives mid-integration.
module tb_bunch_integrator;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] adc = '0;
  logic rf_marker = 0;
  logic [15:0] d, w, b;
  logic signed [23:0] integral;
  logic integral_valid, busy;
  int checks = 0, failures = 0;
  int pc = 0;
  int samp [int];
  int valid_at [$];
  logic signed [23:0] val_q [$];

  bunch_integrator dut (.clk, .rst_n, .adc, .rf_marker, .cfg_trig_delay(d),
    .cfg_win_len(w), .cfg_base_delay(b), .integral, .integral_valid, .busy);

  always #4 clk = ~clk;
  always @(posedge clk) begin
    pc <= pc + 1;
    if (integral_valid) begin valid_at.push_back(pc); val_q.push_back(integral); end
  end

  int base = 100;
  int pulse_at = -1000;
  // drive the sample that the next posedge (pc+1) will see
  task automatic step();
    int v, t;
    @(negedge clk);
    t = pc + 1;
    base = base + $signed($urandom_range(6)) - 3;
    v = base + $signed($urandom_range(10)) - 5;
    if (t - pulse_at >= 0 && t - pulse_at < 24) v += 400 - 33 * ((t - pulse_at) > 12 ? (t - pulse_at) - 12 : 12 - (t - pulse_at));
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    samp[t] = v;
    adc = 14'(v);
  endtask

  task automatic bunch(input int dd, input int ww, input int bb, input bit retrig);
    int k, p3, exp_v, last, se, be;
    d = 16'(dd); w = 16'(ww); b = 16'(bb);
    // raise the marker at the negedge after posedge k
    @(negedge clk);
    k = pc;
    rf_marker = 1;
    pulse_at = k + 4 + dd + 2;
    p3 = k + 4;
    se = dd + ww; be = bb + ww; last = se > be ? se : be;
    for (int i = 0; i < 30; i++) begin
      step();
      if (i == 15) rf_marker = 0;
    end
    if (retrig) begin
      // a second edge in the middle restarts the integration
      rf_marker = 1;
      k = pc;
      p3 = k + 4;
      pulse_at = k + 4 + dd + 2;
      for (int i = 0; i < 20; i++) begin step(); if (i == 10) rf_marker = 0; end
    end
    for (int i = 0; i < last + 10; i++) step();
    exp_v = 0;
    for (int i = dd; i < dd + ww; i++) exp_v += samp[p3 + i];
    for (int i = bb; i < bb + ww; i++) exp_v -= samp[p3 + i];
    checks++;
    if (valid_at.size() != 1) begin
      failures++; $display("FAIL: %0d result strobes, expected 1", valid_at.size());
    end else begin
      checks++;
      if (val_q[0] != 24'(exp_v)) begin
        failures++; $display("FAIL: integral %0d expected %0d (d=%0d w=%0d b=%0d)", val_q[0], exp_v, dd, ww, bb);
      end
      checks++;
      // cnt reaches last at edge p3+last; the strobe is high during the following clock
      if (valid_at[0] != p3 + last) begin
        failures++; $display("FAIL: strobe at edge %0d expected %0d", valid_at[0], p3 + last);
      end
    end
    valid_at.delete(); val_q.delete();
    for (int i = 0; i < 212 - last - 40; i++) step();
  endtask

  initial begin
    d = 2; w = 32; b = 120;
    repeat (3) step();
    rst_n = 1;
    repeat (5) step();
    bunch(2, 32, 120, 0);
    bunch(0, 32, 120, 0);
    bunch(5, 16, 60, 0);
    bunch(10, 1, 100, 0);
    bunch(3, 40, 150, 1);
    for (int n = 0; n < 20; n++) bunch($urandom_range(8), 1 + $urandom_range(40), 60 + $urandom_range(100), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
