// tb_pid_controller: self-checking test of the 10 kHz PID controller.
//
// Applies a random intensity and random Q8.8 gains at each tick and checks
// the correction against a reference PID computed here with 64-bit integers
// (error = setpoint - intensity, clamped integral, derivative of the error,
// arithmetic shift by 8, saturation to 16 bits). Also checks that the output
// changes only on the clock after a tick, that the output saturates, and
// that disabling or clearing the controller zeroes the correction and the
// integral.
module tb_pid_controller;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0, tick = 0;
  logic signed [23:0] intensity = '0;
  logic [23:0] setpoint = '0;
  logic signed [15:0] kp = 0, ki = 0, kd = 0;
  logic signed [15:0] corr;
  logic corr_valid;
  logic signed [31:0] err;
  int checks = 0, failures = 0;
  longint m_int = 0, m_eprev = 0;
  int sat_hi = 0, sat_lo = 0;
  localparam longint IMAX = 64'h7FFF_FFFF >>> 4;

  pid_controller dut (.clk, .rst_n, .clear, .enable, .tick, .intensity, .setpoint, .kp, .ki, .kd, .corr, .corr_valid, .err);

  always #4 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint model_step(input longint e);
    longint i, dd, u;
    i = m_int + e;
    if (i > IMAX) i = IMAX;
    if (i < -IMAX) i = -IMAX;
    dd = e - m_eprev;
    u = (longint'(kp) * e + longint'(ki) * i + longint'(kd) * dd) >>> 8;
    m_int = i; m_eprev = e;
    if (u > 32767) begin u = 32767; sat_hi++; end
    if (u < -32768) begin u = -32768; sat_lo++; end
    return u;
  endfunction

  task automatic do_tick(input int spread);
    longint e, expv;
    @(negedge clk);
    intensity = 24'($signed($urandom_range(2 * spread)) - spread + 5000);
    e = longint'(setpoint) - longint'(intensity);
    tick = 1;
    @(negedge clk);
    tick = 0;
    expv = model_step(e);
    chk(corr_valid === 1'b1, "corr_valid not one clock after tick");
    chk(longint'(corr) == expv, $sformatf("corr %0d expected %0d (e=%0d)", corr, expv, e));
    chk(longint'(err) == e, "err output");
    repeat ($urandom_range(4)) begin
      intensity = 24'($urandom);
      @(negedge clk);
      chk(corr === 16'(expv) && corr_valid === 1'b0, "corr changed without tick");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    setpoint = 24'd5000;
    enable = 1;
    // moderate gains
    kp = 16'sd256; ki = 16'sd16; kd = 16'sd64;
    for (int i = 0; i < 200; i++) do_tick(300);
    // random gains including negative ones
    for (int i = 0; i < 300; i++) begin
      kp = 16'($urandom_range(2000)) - 16'sd1000; ki = 16'($urandom_range(200)) - 16'sd100; kd = 16'($urandom_range(2000)) - 16'sd1000;
      do_tick(20000);
    end
    // large gains: saturation both ways
    kp = 16'sd32000; ki = 16'sd0; kd = 16'sd0;
    for (int i = 0; i < 50; i++) do_tick(100000);
    chk(sat_hi > 0 && sat_lo > 0, "saturation never exercised");
    // disable: output zero, integral cleared
    @(negedge clk); enable = 0; @(negedge clk);
    chk(corr === 16'sd0, "corr not zero when disabled");
    m_int = 0; m_eprev = 0;
    enable = 1; kp = 16'sd100; ki = 16'sd50; kd = 16'sd10;
    for (int i = 0; i < 20; i++) do_tick(300);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk(corr === 16'sd0, "corr not zero after clear");
    m_int = 0; m_eprev = 0;
    for (int i = 0; i < 20; i++) do_tick(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
