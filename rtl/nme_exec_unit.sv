// nme_exec_unit: the NME execution unit (EU) for near-memory partial reduction.
//
// The EU computes one slice of Y' += edge_w * X per cycle with intra-feature
// parallelism: NUM_PE processing elements each handle eight consecutive BF16
// elements, so a pass covers 8*NUM_PE elements (256 bytes with the 16 PEs of
// the evaluated configuration). Longer vectors take several passes, issued by
// the NME controller. The edge weight is broadcast to every multiplier.
//
// Reduction operators (C-type Op field): weighted_sum and mean use the Edge_W
// of the instruction (for mean the CAE puts 1/n there), sum forces the weight
// to 1.0. This follows the paper; the Op code values are this design's choice.
//
// Interface: `in_valid` with `op`, `edge_w`, `x` (source slice) and `psum`
// (partial sums read from the data buffer). `out_valid`/`y` follow one cycle
// later. No back-pressure: the EU accepts a pass every cycle.
module nme_exec_unit
  import gnnear_pkg::*;
#(
  parameter int unsigned NUM_PE_P = NUM_PE,
  parameter int unsigned LANES    = PE_LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  red_op_e                       op,
  input  bf16_t                         edge_w,
  input  logic [NUM_PE_P*LANES*16-1:0]  x,
  input  logic [NUM_PE_P*LANES*16-1:0]  psum,
  output logic                          out_valid,
  output logic [NUM_PE_P*LANES*16-1:0]  y
);

  localparam int unsigned SLICE = LANES*16;

  bf16_t w_eff;
  assign w_eff = (op == RED_SUM) ? BF16_ONE : edge_w;

  for (genvar p = 0; p < NUM_PE_P; p++) begin : g_pe
    nme_pe #(.LANES(LANES)) u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (in_valid),
      .edge_w(w_eff),
      .x     (x[p*SLICE +: SLICE]),
      .psum  (psum[p*SLICE +: SLICE]),
      .y     (y[p*SLICE +: SLICE])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
