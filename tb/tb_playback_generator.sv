// tb_playback_generator: self-checking test of the spill playback generator.
//
// Connects the generator to a memory model holding a known pattern
// (value = spill * 1000 + sample * 7 + 1) in a reduced configuration
// (4 spills of 16 samples, tick every 7 clocks). For each spill it checks
// that ticks are exactly tick_period clocks apart, the first tick comes two
// clocks after spill_go, sample k appears on ref_out two clocks after tick k,
// done pulses after spill_len samples and the last sample is held, and that
// tick_count counts the ticks since spill_go. Includes a shortened spill
// (spill_len = 5) and a restart in the middle of a spill.
module tb_playback_generator;
  localparam int NS = 4, SL = 16;
  logic clk = 0, rst_n = 0, spill_go = 0;
  logic [1:0] spill_idx = '0;
  logic [15:0] tick_period = 16'd7, spill_len = 16'd16;
  logic mem_rd_en;
  logic [5:0] mem_rd_addr;
  logic [15:0] mem_rd_data;
  logic tick, ref_valid, playing, done;
  logic [15:0] tick_count, ref_out;
  int checks = 0, failures = 0;

  playback_generator #(.DAC_W(16), .NUM_SPILLS(NS), .SPILL_LEN(SL)) dut (
    .clk, .rst_n, .spill_go, .spill_idx, .cfg_tick_period(tick_period), .cfg_spill_len(spill_len),
    .mem_rd_en, .mem_rd_addr, .mem_rd_data, .tick, .tick_count, .ref_out, .ref_valid, .playing, .done);

  always #4 clk = ~clk;

  function automatic logic [15:0] pat(input int s, input int k);
    return 16'(s * 1000 + k * 7 + 1);
  endfunction

  always_ff @(posedge clk) if (mem_rd_en) mem_rd_data <= pat(int'(mem_rd_addr[5:4]), int'(mem_rd_addr[3:0]));

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic play(input int s, input int len, input int stop_after);
    int k = 0, since = 0, ticks = 0, done_seen = 0;
    int tick_at [$];
    int cyc = 0;
    @(negedge clk);
    spill_idx = 2'(s); spill_go = 1;
    @(negedge clk);
    spill_go = 0;
    // now one clock after spill_go: the first tick must be high
    while (cyc < (len + 3) * int'(tick_period) && ticks < stop_after) begin
      if (tick) begin tick_at.push_back(cyc); ticks++; end
      if (done) done_seen++;
      // ref check: two clocks after tick k
      if (tick_at.size() > 0 && cyc == tick_at[$] + 2 && tick_at.size() <= len) begin
        chk(ref_out === pat(s, tick_at.size() - 1), $sformatf("spill %0d sample %0d: ref %0d expected %0d", s, tick_at.size() - 1, ref_out, pat(s, tick_at.size() - 1)));
        chk(ref_valid === 1'b1, "ref_valid");
      end
      if (tick_at.size() > len && tick) chk(ref_out === pat(s, len - 1), "last sample not held");
      @(negedge clk); cyc++;
      chk(tick_count == 16'(ticks), $sformatf("tick_count %0d expected %0d", tick_count, ticks));
    end
    chk(tick_at[0] == 1, "first tick not two clocks after spill_go");
    for (int i = 1; i < tick_at.size(); i++)
      chk(tick_at[i] - tick_at[i-1] == int'(tick_period), "tick period");
    if (stop_after > len) begin
      chk(done_seen == 1, $sformatf("done seen %0d times", done_seen));
      chk(playing === 1'b0, "still playing after spill_len samples");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    for (int s = 0; s < NS; s++) play(s, SL, 1000);
    spill_len = 16'd5; tick_period = 16'd11;
    play(2, 5, 1000);
    spill_len = 16'd0; tick_period = 16'd3;    // 0 means the full length
    play(1, SL, 1000);
    spill_len = 16'd16;
    play(3, SL, 6);                            // interrupted by a new spill
    play(0, SL, 1000);
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
