// tb_spill_conditioning: self-checking test of the final conditioning stage.
//
// A clock-by-clock reference model in the testbench follows the rules of the
// stage: target = ref + corr clamped to [0, 65535]; every rate_div clocks
// the DAC code moves toward the target by at most slew_max (RUN) or falls by
// ramp_step (RAMP, and on the clock that enters RAMP); RUN enters RAMP on abort or when tick_count reaches
// timeout; RAMP ends with spill_done when the code is zero. The stimulus
// plays spills with random reference steps and corrections (including ones
// that leave the DAC range), ends some by abort and some by timeout, and
// checks the DAC code, the state and every strobe on every clock.
module tb_spill_conditioning;
  import srs_pkg::*;
  logic clk = 0, rst_n = 0, spill_go = 0, abort = 0;
  logic [15:0] tick_count = '0, ref_in = '0;
  logic signed [15:0] corr = '0;
  logic [15:0] slew_max = 16'd500, ramp_step = 16'd300, rate_div = 16'd3, timeout = 16'd40;
  logic [15:0] dac;
  cond_state_e state;
  logic spill_done, slew_limited, timed_out, aborted;
  int checks = 0, failures = 0;
  int n_abort = 0, n_timeout = 0, n_slew = 0, n_done = 0, n_sat = 0;

  spill_conditioning dut (.clk, .rst_n, .spill_go, .abort_req(abort), .tick_count, .ref_in, .corr,
    .cfg_slew_max(slew_max), .cfg_ramp_step(ramp_step), .cfg_rate_div(rate_div), .cfg_timeout(timeout),
    .dac, .state, .spill_done, .slew_limited, .timed_out, .aborted);

  always #4 clk = ~clk;

  // reference model
  int m_dac = 0, m_state = 0, m_div = 0;
  bit m_done = 0, m_lim = 0, m_to = 0, m_ab = 0;
  always @(posedge clk) begin
    int tgt, nd, diff;
    bit upd, lim;
    if (rst_n) begin
      upd = (m_div == 0);
      m_div = (m_div == 0) ? (rate_div == 0 ? 0 : int'(rate_div) - 1) : m_div - 1;
      tgt = int'(ref_in) + int'(corr);
      if (tgt < 0) tgt = 0;
      if (tgt > 65535) tgt = 65535;
      lim = 0; nd = m_dac;
      if (m_state == 2 || (m_state == 1 && (abort || tick_count >= timeout))) begin
        nd = (int'(ramp_step) >= m_dac) ? 0 : m_dac - int'(ramp_step);
      end else if (m_state == 1) begin
        diff = tgt - m_dac;
        if (diff > int'(slew_max)) begin nd = m_dac + int'(slew_max); lim = 1; end
        else if (diff < -int'(slew_max)) begin nd = m_dac - int'(slew_max); lim = 1; end
        else nd = tgt;
      end else nd = 0;
      m_done = 0; m_to = 0; m_ab = 0; m_lim = 0;
      if (upd) begin m_lim = lim; end
      case (m_state)
        0: if (spill_go) m_state = 1;
        1: if (abort) begin m_state = 2; m_ab = 1; end
           else if (tick_count >= timeout) begin m_state = 2; m_to = 1; end
        2: if (m_dac == 0) begin m_state = 0; m_done = 1; end
        default: ;
      endcase
      if (upd) m_dac = nd;
    end
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (int'(dac) != m_dac || int'(state) != m_state || spill_done != m_done || slew_limited != m_lim ||
        timed_out != m_to || aborted != m_ab) begin
      failures++;
      $display("FAIL t=%0t: dac %0d/%0d state %0d/%0d done %0b/%0b lim %0b/%0b to %0b/%0b ab %0b/%0b",
               $time, dac, m_dac, state, m_state, spill_done, m_done, slew_limited, m_lim, timed_out, m_to, aborted, m_ab);
    end
    if (slew_limited) n_slew++;
    if (spill_done) n_done++;
    if (timed_out) n_timeout++;
    if (aborted) n_abort++;
  end

  task automatic spill(input bit by_abort);
    @(negedge clk); spill_go = 1; tick_count = 0;
    @(negedge clk); spill_go = 0;
    for (int t = 0; t < 60 && state != COND_IDLE; t++) begin
      ref_in = 16'($urandom_range(65535));
      corr = 16'($urandom);
      if (int'(ref_in) + int'(corr) < 0 || int'(ref_in) + int'(corr) > 65535) n_sat++;
      repeat (1 + $urandom_range(20)) begin
        @(negedge clk);
        if (by_abort && t == 30) abort = 1;
      end
      abort = 0;
      if (state == COND_RUN) tick_count = tick_count + 1;
    end
    while (state != COND_IDLE) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      slew_max = 16'(100 + $urandom_range(4000));
      ramp_step = 16'(50 + $urandom_range(3000));
      rate_div = 16'($urandom_range(4));
      spill(i % 2);
    end
    checks++;
    if (n_abort == 0 || n_timeout == 0 || n_slew == 0 || n_done != 6 || n_sat == 0) begin
      failures++;
      $display("FAIL: coverage abort=%0d timeout=%0d slew=%0d done=%0d sat=%0d", n_abort, n_timeout, n_slew, n_done, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
