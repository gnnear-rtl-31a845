// nme_pe: one processing element of the NME execution unit.
//
// A PE takes eight BF16 elements of a source vector X (a 128-bit slice), one
// BF16 edge weight that is broadcast to all eight multipliers, and the eight
// matching BF16 partial sums of the destination vector. Each lane computes
//     y[i] = psum[i] + edge_w * x[i]
// and registers the result (the "Reg" boxes of the execution-unit drawing).
// Lane count, the 128-bit X slice, the 16-bit broadcast weight and the 16-bit
// registered lane outputs follow the paper. In the paper's drawing the register
// feeds back into its adder; here the partial sums of the many destinations of
// a shard live in the NME data buffer, so the second adder operand is the
// partial sum read from that buffer and the register output is written back
// to it (this design's choice).
//
// Timing: one pass per cycle when `en` is high; the result appears on `y` one
// cycle after the inputs. BF16 rounding is truncation (see gnnear_pkg).
module nme_pe
  import gnnear_pkg::*;
#(
  parameter int unsigned LANES = PE_LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  bf16_t                   edge_w,
  input  logic [LANES*16-1:0]     x,
  input  logic [LANES*16-1:0]     psum,
  output logic [LANES*16-1:0]     y
);

  logic [LANES*16-1:0] y_next;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      y_next[i*16 +: 16] = bf16_add(psum[i*16 +: 16], bf16_mul(edge_w, x[i*16 +: 16]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= y_next;
  end

endmodule
