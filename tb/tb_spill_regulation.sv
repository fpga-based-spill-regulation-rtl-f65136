// tb_spill_regulation: closed-loop spill with a 300 Hz disturbance.
//
// Full-size system (no parameter changed) inside a simple beam model: the
// extracted bunch intensity grows with the quadrupole DAC code above a
// threshold (no extraction below code 20000, nominal intensity at code
// 30000) and is modulated by +-30 % at 300 Hz, the ripple that dominates
// the real spill. The reference curve is flat at code 28000, 20 % short of
// the nominal intensity, and the setpoint asks for the nominal intensity.
//
// Two spills of 2048 ticks are played:
//   1  feedback off: the mean logged intensity over the second half of the
//      spill must sit about 20 % below the setpoint;
//   2  feedback on (integral-dominated PID): the mean must come within 2 %
//      of the setpoint, and the correction must be positive.
// The 300 Hz amplitude of the logged intensity is computed for both spills
// (a single-bin DFT) and printed; the loop, tuned for the slow error, is
// not expected to remove it, and the check only requires it to be present.
// Both spills are started with cycle_start, so both play stored spill 0.
// The 300 Hz modulation follows the spill the system was tested on; the
// beam model (threshold, gain, +-30 %) and the PID gains are this
// testbench's own choices and say nothing about the real accelerator.
module tb_spill_regulation;
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
    .dac_quad, .dac_diag, .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata,
    .avs_readdatavalid, .spill_active, .tick, .cond_state);

  always #4 clk = ~clk;

  // ------------------------------------------------------------- beam model
  localparam real PI = 3.14159265358979;
  function automatic int tri_pulse(input int ph);
    int x;
    if (ph < 8 || ph >= 32) return 0;
    x = ph - 8;
    return (x < 12) ? 20 * (x + 1) : 20 * (24 - x);
  endfunction
  int area = 0;
  int phase = 0;
  real amp = 0.0;
  longint cyc = 0;
  always @(negedge clk) begin
    real a, t;
    cyc++;
    phase = (phase + 1) % 212;
    if (phase == 0) begin
      t = real'(cyc) * 8.0e-9;
      a = (real'(dac_quad) - 20000.0) / 10000.0;
      if (a < 0.0) a = 0.0;
      if (a > 1.5) a = 1.5;
      amp = a * (1.0 + 0.3 * $sin(2.0 * PI * 300.0 * t));
    end
    rf_marker = (phase < 106);
    adc_extr = 14'(-150 + int'(real'(tri_pulse(phase)) * amp));
    adc_circ = 14'(600 + tri_pulse(phase));
  end

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

  // run one spill; return the mean intensity and the 300 Hz amplitude over
  // the second half, and the mean correction there
  task automatic run_spill(output real mean_i, output real amp300, output real mean_c);
    logic [31:0] d;
    real re, im, t;
    int n, li, lc;
    // cycle_start: both spills play stored spill 0
    @(negedge clk); spill_event = 1; cycle_start = 1;
    @(negedge clk); spill_event = 0; cycle_start = 0;
    n = 0;
    while (spill_active && n < 40_000_000) begin @(negedge clk); n++; end
    chk(!spill_active && dac_quad == 16'd0, "spill did not end");
    mean_i = 0.0; mean_c = 0.0; re = 0.0; im = 0.0;
    for (int k = LOG_DEPTH / 2; k < LOG_DEPTH; k++) begin
      rd({2'b10, 14'(k)}, d); li = int'($signed(d));
      rd({2'b11, 14'(k)}, d); lc = int'($signed(d));
      mean_i += real'(li); mean_c += real'(lc);

      t = real'(k) / 10000.0;
      re += real'(li) * $cos(2.0 * PI * 300.0 * t);
      im += real'(li) * $sin(2.0 * PI * 300.0 * t);
    end
    mean_i /= real'(LOG_DEPTH / 2);
    mean_c /= real'(LOG_DEPTH / 2);
    amp300 = 2.0 * $sqrt(re * re + im * im) / real'(LOG_DEPTH / 2);
  endtask

  initial begin
    real m_open, a_open, c_open, m_closed, a_closed, c_closed;
    for (int i = 0; i < 24; i++) area += tri_pulse(i + 8);
    repeat (5) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < SPILL_LEN; k++) wr({2'b01, 14'(k)}, 32'd28000);
    wr({8'h00, REG_SETPOINT}, 32'(area));
    wr({8'h00, REG_KP}, 32'd32);
    wr({8'h00, REG_KI}, 32'd16);
    wr({8'h00, REG_KD}, 32'd0);
    wr({8'h00, REG_CTRL}, 32'd0);
    repeat (300) @(negedge clk);
    run_spill(m_open, a_open, c_open);
    wr({8'h00, REG_CTRL}, 32'd1);
    run_spill(m_closed, a_closed, c_closed);
    $display("setpoint %0d | open loop: mean %0.1f, 300 Hz amplitude %0.1f | closed loop: mean %0.1f, 300 Hz amplitude %0.1f, mean correction %0.1f",
             area, m_open, a_open, m_closed, a_closed, c_closed);
    chk(m_open > 0.75 * real'(area) && m_open < 0.85 * real'(area), "open-loop intensity not 20 % short");
    chk(m_closed > 0.98 * real'(area) && m_closed < 1.02 * real'(area), "closed loop did not reach the setpoint");
    chk(c_closed > 1500.0 && c_closed < 3000.0 && c_open == 0.0, "correction not about +2000 codes");
    chk(a_open > 100.0 && a_closed > 100.0, "300 Hz modulation not seen in the intensity log");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
