// dp_ram: simple dual-port RAM used for the spill buffers.
//
// One write port and one read port on the same clock, each with its own
// address. The read is synchronous: rd_data shows the word at rd_addr one
// clock after rd_en. Reading and writing one address in the same cycle
// returns the old word. It is written as a plain array so that synthesis
// maps it to FPGA block RAM.
//
// The paper stores eight reference spills (Spill 1 .. Spill 8) and the
// intensity and correction logs in on-board FPGA memory; this block is that
// memory. Its organisation (one flat array, spill index in the upper address
// bits) is this design's choice. The contents start at zero.
module dp_ram #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 8 * 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);

  logic [DW-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
