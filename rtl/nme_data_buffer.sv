// nme_data_buffer: the SRAM data buffer of a Near-Memory Engine.
//
// It holds the BF16 partial sums of the destination vertices of the interval
// the NME is working on. The evaluated configuration has a 256 KB dual-ported
// buffer built from 16-byte words; here the sixteen 16-byte words that the
// sixteen PEs use in one pass are addressed together as one 256-byte row
// (1024 rows = 256 KB). Row r of destination slot d is at d*4 + r, so each of
// the 256 Dst_Index values owns 1 KB, which is the largest vector a 10-bit
// Vector_Size can describe. The row organisation is this design's choice.
//
// Ports: one read port (registered: data one cycle after `rd_en`) and one
// write port. A read and a write to the same row in the same cycle return the
// old contents. Written as an array so that a memory compiler macro can
// replace it.
module nme_data_buffer
  import gnnear_pkg::*;
#(
  parameter int unsigned WIDTH = ROW_BYTES*8,
  parameter int unsigned DEPTH = BUF_ROWS
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

endmodule
