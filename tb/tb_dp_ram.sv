// tb_dp_ram: self-checking test of the dual-port spill memory.
//
// Writes random words to random addresses of the default-size memory
// (8 spills x 2048 samples), tracking a reference copy, and reads random
// addresses back, checking the one-clock read latency, that rd_data holds
// when rd_en is low, and that a read of the address being written returns
// the old word.
module tb_dp_ram;
  localparam int DEPTH = 8 * 2048;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [13:0] wr_addr = '0, rd_addr = '0;
  logic [15:0] wr_data = '0, rd_data;
  logic [15:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  dp_ram dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  always #4 clk = ~clk;

  initial begin
    logic [15:0] expv, held;
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    // fill part of the memory
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 14'($urandom_range(DEPTH - 1)); wr_data = 16'($urandom);
      ref_mem[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // read back
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 14'($urandom_range(DEPTH - 1));
      expv = ref_mem[rd_addr];
      // write the same address with new data in the same cycle, sometimes
      wr_en = ($urandom_range(3) == 0);
      wr_addr = rd_addr; wr_data = 16'($urandom);
      if (wr_en) ref_mem[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== expv) begin failures++; $display("FAIL: addr %0d read %h expected %h", rd_addr, rd_data, expv); end
      held = rd_data;
      rd_addr = 14'($urandom_range(DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL: rd_data changed without rd_en"); end
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
