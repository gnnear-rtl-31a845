// cae_vpu: vector-processing unit of the CAE.
//
// CORES SIMD cores of LANES BF16 lanes each (32 x 16 = 512 lanes) work in
// lock-step on one vector operation per cycle. The VPU does the element-wise
// work of GNN training that the GEMM engine does not: adding the bias and the
// partial results, activation functions and their gradients, and the weight
// update of gradient descent. Each lane has one multiplier and one adder, so a
// fused multiply-add counts two operations per lane and cycle
// (512 x 2 x 0.7 GHz, about 700 GFLOPS).
//
// Operations (op, on operand vectors a, b, c and scalar s):
//   VOP_ADD   y = a + b
//   VOP_MUL   y = a * b
//   VOP_FMA   y = a * b + c
//   VOP_AXPY  y = s * a + b      (gradient step with s = -learning rate)
//   VOP_RELU  y = max(a, 0)
//   VOP_DRELU y = (a > 0) ? b : 0 (ReLU gradient: mask b by the sign of a)
//   VOP_SCALE y = s * a          (e.g. mean normalisation)
// Timing: in_valid with the operands; y and out_valid one cycle later.
// The cores are independent, so a vector of any width up to CORES*LANES is
// processed in one cycle.
//
// Paper versus this design: the core count, SIMD width and BF16 are the
// paper's; the paper does not list the VPU's operations, so the set above and
// its encoding are this design's choice.
module cae_vpu
  import gnnear_pkg::*;
#(
  parameter int unsigned CORES = 32,
  parameter int unsigned LANES = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  vop_e                        op,
  input  bf16_t                       s,
  input  bf16_t [CORES*LANES-1:0]     a,
  input  bf16_t [CORES*LANES-1:0]     b,
  input  bf16_t [CORES*LANES-1:0]     c,
  output logic                        out_valid,
  output bf16_t [CORES*LANES-1:0]     y
);

  localparam int unsigned N = CORES * LANES;

  function automatic logic bf16_pos(input bf16_t v);
    return !v[15] && (v[14:7] != 8'd0);
  endfunction

  bf16_t [N-1:0] r;
  always_comb begin
    for (int l = 0; l < N; l++) begin
      unique case (op)
        VOP_ADD:   r[l] = bf16_add(a[l], b[l]);
        VOP_MUL:   r[l] = bf16_mul(a[l], b[l]);
        VOP_FMA:   r[l] = bf16_add(bf16_mul(a[l], b[l]), c[l]);
        VOP_AXPY:  r[l] = bf16_add(bf16_mul(s, a[l]), b[l]);
        VOP_RELU:  r[l] = bf16_pos(a[l]) ? a[l] : BF16_ZERO;
        VOP_DRELU: r[l] = bf16_pos(a[l]) ? b[l] : BF16_ZERO;
        VOP_SCALE: r[l] = bf16_mul(s, a[l]);
        default:   r[l] = BF16_ZERO;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= r;
    end
  end

  a_known_op: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> op inside {VOP_ADD, VOP_MUL, VOP_FMA, VOP_AXPY, VOP_RELU, VOP_DRELU, VOP_SCALE})
    else $error("undefined VPU operation");

endmodule
