// moving_average: boxcar smoothing of the bunch integrals.
//
// Keeps the last 2^LOG2_N input values in a circular buffer and a running
// sum; each new value adds itself to the sum and removes the value it
// replaces. The output is the running sum divided by 2^LOG2_N (arithmetic
// shift), so it is the mean of the last 2^LOG2_N bunches. Until the buffer
// has filled once, the missing entries count as zero.
//
// The paper names a moving average between the bunch integrator and the
// 10 kHz PID decimation but gives neither its length nor its form; the
// power-of-two length (64 bunches, about 109 us, roughly one 10 kHz period
// of 59 bunches) is this design's choice.
//
// Interface: in_valid/in_data one value per strobe. out_valid/out_data are
// registered: the mean including a value appears one clock after its strobe.
// clear empties the buffer (used at the start of each spill).
module moving_average #(
  parameter int unsigned W      = 24,
  parameter int unsigned LOG2_N = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W-1:0] out_data
);

  localparam int unsigned N = 1 << LOG2_N;

  logic signed [W-1:0]        buf_q [N];
  logic [LOG2_N-1:0]          wr_ptr;
  logic signed [W+LOG2_N-1:0] sum_q, sum_d;

  always_comb begin
    sum_d = sum_q + (W+LOG2_N)'(in_data) - (W+LOG2_N)'(buf_q[wr_ptr]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      sum_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int i = 0; i < N; i++) buf_q[i] <= '0;
    end else if (clear) begin
      wr_ptr    <= '0;
      sum_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int i = 0; i < N; i++) buf_q[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        buf_q[wr_ptr] <= in_data;
        wr_ptr        <= wr_ptr + 1'b1;
        sum_q         <= sum_d;
        out_data      <= W'(sum_d >>> LOG2_N);
      end
    end
  end

endmodule
