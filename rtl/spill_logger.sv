// spill_logger: records the intensity and correction waveforms of a spill.
//
// Two log memories of LOG_DEPTH words, one for the smoothed beam intensity
// and one for the PID correction, are filled at the 10 kHz control rate:
// every strobe while the spill is active writes both values at address n
// and advances n. spill_go sets n back to zero; when n reaches LOG_DEPTH the
// logger stops writing and raises full, so the first LOG_DEPTH ticks of the
// spill are kept. The host reads both memories through host_rd_addr; the
// read data appear one clock after host_rd_en.
//
// Follows the paper: a spill logger filling intensity and correction
// arrays in FPGA memory for the operators, with 2048-entry arrays. This
// design's own choices: logging the smoothed (not per-bunch) intensity at
// the 10 kHz rate, and stopping rather than wrapping when full.
module spill_logger #(
  parameter int unsigned INT_W     = 24,
  parameter int unsigned CORR_W    = 16,
  parameter int unsigned LOG_DEPTH = 2048,
  parameter int unsigned AW        = $clog2(LOG_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              spill_go,
  input  logic              active,
  input  logic              strobe,
  input  logic [INT_W-1:0]  intensity,
  input  logic [CORR_W-1:0] corr,
  input  logic              host_rd_en,
  input  logic [AW-1:0]     host_rd_addr,
  output logic [INT_W-1:0]  host_int_data,
  output logic [CORR_W-1:0] host_corr_data,
  output logic [AW:0]       count,
  output logic              full
);

  logic we;

  assign full = (count == (AW+1)'(LOG_DEPTH));
  assign we   = strobe && active && !full && !spill_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        count <= '0;
    else if (spill_go) count <= '0;
    else if (we)       count <= count + 1'b1;
  end

  dp_ram #(.DW(INT_W), .DEPTH(LOG_DEPTH)) u_log_int (
    .clk     (clk),
    .wr_en   (we),
    .wr_addr (count[AW-1:0]),
    .wr_data (intensity),
    .rd_en   (host_rd_en),
    .rd_addr (host_rd_addr),
    .rd_data (host_int_data)
  );

  dp_ram #(.DW(CORR_W), .DEPTH(LOG_DEPTH)) u_log_corr (
    .clk     (clk),
    .wr_en   (we),
    .wr_addr (count[AW-1:0]),
    .wr_data (corr),
    .rd_en   (host_rd_en),
    .rd_addr (host_rd_addr),
    .rd_data (host_corr_data)
  );

endmodule
