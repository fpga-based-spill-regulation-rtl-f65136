// tb_spill_sequencer: self-checking test of the spill sequencer.
//
// Plays several cycles of spill events and checks, against a counter kept by
// the testbench, the index chosen for each spill (0,1,...,7 then wrapping,
// and back to 0 after cycle_start), the one-clock spill_go pulse, that
// spill_active spans the spill until spill_done, and that an event during an
// active spill is flagged as missed and does not start a spill.
module tb_spill_sequencer;
  logic clk = 0, rst_n = 0;
  logic cycle_start = 0, spill_event = 0, spill_done = 0;
  logic [2:0] spill_idx;
  logic spill_go, spill_active, missed;
  int checks = 0, failures = 0;
  int exp_idx = 0;

  spill_sequencer dut (.clk, .rst_n, .cycle_start, .spill_event, .spill_done, .spill_idx, .spill_go, .spill_active, .missed);

  always #4 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_spill(input bit with_cycle_start, input bit extra_event);
    @(negedge clk);
    spill_event = 1; cycle_start = with_cycle_start;
    if (with_cycle_start) exp_idx = 0;
    @(negedge clk);
    spill_event = 0; cycle_start = 0;
    chk(spill_go === 1'b1, "spill_go missing");
    chk(spill_active === 1'b1, "spill_active not set");
    chk(spill_idx === 3'(exp_idx), $sformatf("index %0d expected %0d at %0t", spill_idx, exp_idx, $time));
    @(negedge clk);
    chk(spill_go === 1'b0, "spill_go longer than one clock");
    repeat ($urandom_range(5)) @(negedge clk);
    if (extra_event) begin
      spill_event = 1;
      @(negedge clk);
      spill_event = 0;
      chk(missed === 1'b1, "missed not flagged");
      chk(spill_go === 1'b0, "spill started during active spill");
      chk(spill_idx === 3'(exp_idx), "index changed by ignored event");
    end
    repeat (3) @(negedge clk);
    chk(spill_active === 1'b1, "spill_active dropped early");
    spill_done = 1;
    @(negedge clk);
    spill_done = 0;
    chk(spill_active === 1'b0, "spill_active not cleared by spill_done");
    exp_idx = (exp_idx + 1) % 8;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 11; i++) run_spill(0, i == 3);
    // cycle restart in the middle of a cycle
    run_spill(1, 0);
    run_spill(0, 0);
    // cycle_start alone resets the pointer
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0; exp_idx = 0;
    for (int i = 0; i < 9; i++) run_spill(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
