// cae_scratchpad: scratchpad memory of the CAE (16 MB, 8 banks, dual port,
// 64-byte words).
//
// The scratchpad buffers weights, input and output features, edge lists and
// the window buffer's results; how it is divided among them is decided by
// software. It is built from BANKS true dual-port banks (cae_spm_bank) and
// word addresses are interleaved over the banks by their low bits, so that
// sequential streams spread over all banks. Each of the two ports (A and B)
// reads or writes one 64-byte word per cycle; read data returns one cycle
// after the request.
// Interface per port: en, we, addr (word address), wdata, rdata.
//
// Paper versus this design: size, bank count, dual ports and word size are the
// paper's; low-order interleaving and the one-cycle read are this design's
// choices. Port A has priority when both ports write the same word.
module cae_scratchpad #(
  parameter int unsigned BYTES      = 16 * 1024 * 1024,
  parameter int unsigned BANKS      = 8,
  parameter int unsigned WORD_BYTES = 64
) (
  input  logic                                        clk,
  input  logic                                        a_en,
  input  logic                                        a_we,
  input  logic [$clog2(BYTES/WORD_BYTES)-1:0]         a_addr,
  input  logic [WORD_BYTES*8-1:0]                     a_wdata,
  output logic [WORD_BYTES*8-1:0]                     a_rdata,
  input  logic                                        b_en,
  input  logic                                        b_we,
  input  logic [$clog2(BYTES/WORD_BYTES)-1:0]         b_addr,
  input  logic [WORD_BYTES*8-1:0]                     b_wdata,
  output logic [WORD_BYTES*8-1:0]                     b_rdata
);

  localparam int unsigned WORDS = BYTES / WORD_BYTES;
  localparam int unsigned BDEPTH = WORDS / BANKS;
  localparam int unsigned BKW   = $clog2(BANKS);
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned W     = WORD_BYTES * 8;

  logic [BANKS-1:0][W-1:0] a_rd, b_rd;
  logic [BKW-1:0]          a_bank_q, b_bank_q;

  for (genvar k = 0; k < BANKS; k++) begin : g_bank
    cae_spm_bank #(.WIDTH(W), .DEPTH(BDEPTH)) u_bank (
      .clk    (clk),
      .a_en   (a_en && a_addr[BKW-1:0] == BKW'(k)),
      .a_we   (a_we),
      .a_addr (a_addr[AW-1:BKW]),
      .a_wdata(a_wdata),
      .a_rdata(a_rd[k]),
      .b_en   (b_en && b_addr[BKW-1:0] == BKW'(k)),
      .b_we   (b_we),
      .b_addr (b_addr[AW-1:BKW]),
      .b_wdata(b_wdata),
      .b_rdata(b_rd[k])
    );
  end

  always_ff @(posedge clk) begin
    if (a_en) a_bank_q <= a_addr[BKW-1:0];
    if (b_en) b_bank_q <= b_addr[BKW-1:0];
  end

  assign a_rdata = a_rd[a_bank_q];
  assign b_rdata = b_rd[b_bank_q];

endmodule
