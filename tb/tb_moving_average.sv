// tb_moving_average: self-checking test of the boxcar moving average.
//
// Feeds random signed values with random gaps and keeps its own list of
// every input since the last clear. The expected output is the sum of the
// last 64 entries (missing ones count as zero) shifted right by 6, and it
// must appear exactly one clock after the input strobe. Also checks that
// clear empties the history.
module tb_moving_average;
  localparam int LOG2_N = 6;
  localparam int N = 1 << LOG2_N;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [23:0] in_data = '0, out_data;
  logic out_valid;
  int checks = 0, failures = 0;
  longint hist [$];

  moving_average #(.W(24), .LOG2_N(LOG2_N)) dut (.clk, .rst_n, .clear, .in_valid, .in_data, .out_valid, .out_data);

  always #4 clk = ~clk;

  function automatic longint expected();
    longint s = 0;
    int n = hist.size();
    for (int i = (n > N ? n - N : 0); i < n; i++) s += hist[i];
    return s >>> LOG2_N;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL: out_valid %0b expected %0b", out_valid, in_valid); end
      if (in_valid) begin
        checks++;
        if (longint'(out_data) != expected()) begin
          failures++; $display("FAIL t=%0d: out %0d expected %0d", t, out_data, expected());
        end
      end
      clear = (t == 1000);
      if (clear) hist.delete();
      in_valid = !clear && ($urandom_range(3) != 0);
      in_data = 24'($signed($urandom_range(2000000)) - 1000000);
      if (in_valid) hist.push_back(longint'(in_data));
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
