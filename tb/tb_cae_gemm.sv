// tb_cae_gemm: checks the weight-stationary systolic GEMM engine at 8 x 6.
// Weights and input vectors are small random integers (exact in BF16). After
// loading the weights row by row, 30 vectors are streamed in back to back,
// with a gap, then weights are reloaded and more vectors follow. Every
// result vector must equal a x W worked out here, arrive exactly
// ROWS + COLS cycles after its input (one result per cycle for a
// back-to-back stream), and y_valid must never be high without a result due.
module tb_cae_gemm;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 6, LAT = R + C;
  logic clk = 0, rst_n = 0;
  logic w_load = 0, a_valid = 0, y_valid;
  logic [$clog2(R)-1:0] w_row;
  bf16_t [C-1:0] w_vec;
  bf16_t [R-1:0] a_vec;
  bf16_t [C-1:0] y_vec;

  cae_gemm #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .w_load, .w_row, .w_vec, .a_valid, .a_vec,
                                      .y_valid, .y_vec);

  int checks = 0, failures = 0;
  int wm [R][C];
  int expq [$][C];
  longint tq [$];
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (y_valid) begin
      check("result expected", expq.size() > 0);
      if (expq.size() > 0) begin
        check("latency", cyc - tq[0] == LAT);
        for (int j = 0; j < C; j++) check("value", bf16_to_int(y_vec[j]) == expq[0][j]);
        void'(expq.pop_front());
        void'(tq.pop_front());
      end
    end
    if (a_valid) begin
      int e [C];
      for (int j = 0; j < C; j++) begin
        e[j] = 0;
        for (int i = 0; i < R; i++) e[j] += bf16_to_int(a_vec[i]) * wm[i][j];
      end
      expq.push_back(e);
      tq.push_back(cyc);
    end
  end

  task automatic load_weights();
    for (int i = 0; i < R; i++) begin
      @(negedge clk);
      w_load = 1; w_row = $clog2(R)'(i);
      for (int j = 0; j < C; j++) begin
        wm[i][j] = int'($urandom_range(0, 6)) - 3;
        w_vec[j] = int_to_bf16(wm[i][j]);
      end
    end
    @(negedge clk);
    w_load = 0;
  endtask

  task automatic stream(input int n, input bit gaps);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      a_valid = !gaps || ($urandom_range(0, 1) == 1);
      for (int i = 0; i < R; i++) a_vec[i] = int_to_bf16(int'($urandom_range(0, 3)));
    end
    @(negedge clk);
    a_valid = 0;
    repeat (LAT + 3) @(negedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_done;
    w_row = '0; w_vec = '0; a_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    stream(30, 0);
    stream(30, 1);
    load_weights();
    stream(20, 0);
    check("all results out", expq.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
