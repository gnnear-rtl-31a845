// cae_gemm: GEMM engine of the CAE, a weight-stationary BF16 systolic array.
//
// The array has ROWS x COLS processing elements. PE (i,j) holds weight
// W[i][j]. An input vector a (ROWS BF16 values, one row of the activation
// matrix) enters from the left edge, element i delayed by i cycles, and moves
// one PE to the right per cycle; partial sums move one PE down per cycle, each
// PE adding a*W[i][j] to the sum from above. Column j therefore produces
// y[j] = sum_i a[i] * W[i][j] at its bottom edge; the outputs are delayed
// again (COLS-1-j cycles) so that the whole result vector y appears at once.
// One vector per cycle can be streamed in, giving ROWS*COLS MACs per cycle.
//
// Interface: weights are loaded one row per cycle (w_load, w_row, w_vec)
// while no vector is in flight. a_valid/a_vec feed an input vector; the result
// y_vec appears with y_valid exactly LATENCY = ROWS + COLS cycles later.
// There is no back-pressure.
//
// Paper versus this design: the 128 x 128 systolic array and BF16 follow the
// paper (which models its GEMM engine on a TPU); the weight-stationary
// dataflow, the skew/deskew registers and BF16 accumulation with truncation
// are this design's choices.
module cae_gemm
  import gnnear_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          w_load,
  input  logic [$clog2(ROWS)-1:0]       w_row,
  input  bf16_t [COLS-1:0]              w_vec,
  input  logic                          a_valid,
  input  bf16_t [ROWS-1:0]              a_vec,
  output logic                          y_valid,
  output bf16_t [COLS-1:0]              y_vec
);

  localparam int unsigned LATENCY = ROWS + COLS;

  bf16_t w   [ROWS][COLS];
  bf16_t av  [ROWS][COLS];   // activation leaving PE (i,j) to the right
  bf16_t ps  [ROWS][COLS];   // partial sum leaving PE (i,j) downwards
  bf16_t a_in[ROWS];         // skewed left-edge inputs

  // ---- weight registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) w[i][j] <= BF16_ZERO;
    end else if (w_load) begin
      for (int j = 0; j < COLS; j++) w[w_row][j] <= w_vec[j];
    end
  end

  // ---- input skew: row i is delayed by i cycles
  for (genvar i = 0; i < ROWS; i++) begin : g_skew
    if (i == 0) begin : g_d0
      assign a_in[0] = a_valid ? a_vec[0] : BF16_ZERO;
    end else begin : g_dn
      bf16_t sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < i; k++) sr[k] <= BF16_ZERO;
        end else begin
          sr[0] <= a_valid ? a_vec[i] : BF16_ZERO;
          for (int k = 1; k < i; k++) sr[k] <= sr[k-1];
        end
      end
      assign a_in[i] = sr[i-1];
    end
  end

  // ---- PE grid
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          av[i][j] <= BF16_ZERO;
          ps[i][j] <= BF16_ZERO;
        end
    end else begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          bf16_t a_l, p_u;
          a_l = (j == 0) ? a_in[i] : av[i][j-1];
          p_u = (i == 0) ? BF16_ZERO : ps[i-1][j];
          av[i][j] <= a_l;
          ps[i][j] <= bf16_add(p_u, bf16_mul(a_l, w[i][j]));
        end
    end
  end

  // ---- output deskew: column j is delayed by COLS-1-j cycles
  for (genvar j = 0; j < COLS; j++) begin : g_deskew
    localparam int unsigned D = COLS - 1 - j;
    if (D == 0) begin : g_d0
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) y_vec[j] <= BF16_ZERO;
        else        y_vec[j] <= ps[ROWS-1][j];
      end
    end else begin : g_dn
      bf16_t sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= BF16_ZERO;
          y_vec[j] <= BF16_ZERO;
        end else begin
          sr[0] <= ps[ROWS-1][j];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
          y_vec[j] <= sr[D-1];
        end
      end
    end
  end

  // ---- valid pipeline
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], a_valid};
  end
  assign y_valid = vpipe[LATENCY-1];

  a_no_load_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
      w_load |-> (vpipe == '0 && !a_valid))
    else $error("weights changed while vectors are in the array");

endmodule
