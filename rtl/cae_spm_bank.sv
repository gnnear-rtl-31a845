// cae_spm_bank: one bank of the CAE scratchpad, a true dual-port RAM.
//
// DEPTH words of WIDTH bits. Ports A and B each read or write one word per
// cycle; a read returns the word on the cycle after the request (registered
// output). A read and a write of the same word in one cycle return the old
// word. If both ports write the same word in the same cycle, port A's data is
// kept. The dual-port organisation is the paper's; the read latency and the
// collision rule are this design's choices.
module cae_spm_bank #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 32768
) (
  input  logic                     clk,
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [WIDTH-1:0]         a_wdata,
  output logic [WIDTH-1:0]         a_rdata,
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [WIDTH-1:0]         b_wdata,
  output logic [WIDTH-1:0]         b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (b_en && b_we && !(a_en && a_we && a_addr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
  end

endmodule
