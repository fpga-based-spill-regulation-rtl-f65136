// tb_spill_logger: self-checking test of the spill logger.
//
// Reduced to 16-entry logs. Sends strobes with random intensity and
// correction values, some while the spill is inactive (must not be logged),
// more than 16 in one spill (the logger must stop and raise full), then
// reads both memories back through the host port, checking the one-clock
// read latency and every logged pair. A new spill_go must restart at 0.
module tb_spill_logger;
  localparam int D = 16;
  logic clk = 0, rst_n = 0, spill_go = 0, active = 0, strobe = 0, host_rd_en = 0;
  logic [23:0] intensity = '0, host_int_data;
  logic [15:0] corr = '0, host_corr_data;
  logic [3:0] host_rd_addr = '0;
  logic [4:0] count;
  logic full;
  int checks = 0, failures = 0;
  logic [23:0] e_int [$];
  logic [15:0] e_corr [$];

  spill_logger #(.INT_W(24), .CORR_W(16), .LOG_DEPTH(D)) dut (.clk, .rst_n, .spill_go, .active, .strobe,
    .intensity, .corr, .host_rd_en, .host_rd_addr, .host_int_data, .host_corr_data, .count, .full);

  always #4 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic spill(input int n);
    e_int.delete(); e_corr.delete();
    @(negedge clk); spill_go = 1; active = 1;
    @(negedge clk); spill_go = 0;
    chk(count == 0, "count not reset by spill_go");
    for (int i = 0; i < n; i++) begin
      repeat ($urandom_range(3)) @(negedge clk);
      strobe = 1; intensity = 24'($urandom); corr = 16'($urandom);
      if (e_int.size() < D) begin e_int.push_back(intensity); e_corr.push_back(corr); end
      @(negedge clk); strobe = 0;
    end
    active = 0;
    // strobes after the spill are ignored
    repeat (3) begin strobe = 1; intensity = 24'($urandom); @(negedge clk); end
    strobe = 0;
    chk(int'(count) == e_int.size(), $sformatf("count %0d expected %0d", count, e_int.size()));
    chk(full == (e_int.size() == D), "full flag");
    for (int i = 0; i < e_int.size(); i++) begin
      host_rd_en = 1; host_rd_addr = 4'(i);
      @(negedge clk); host_rd_en = 0;
      chk(host_int_data === e_int[i], $sformatf("intensity[%0d] %h expected %h", i, host_int_data, e_int[i]));
      chk(host_corr_data === e_corr[i], $sformatf("correction[%0d] %h expected %h", i, host_corr_data, e_corr[i]));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // strobes before any spill are ignored
    repeat (4) begin strobe = 1; @(negedge clk); end
    strobe = 0;
    chk(count == 0, "logged while inactive");
    spill(10);
    spill(25);
    spill(16);
    spill(3);
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
