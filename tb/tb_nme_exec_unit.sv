// tb_nme_exec_unit: checks the NME execution unit (16 PEs x 8 lanes).
// For each reduction op random small-integer vectors are applied: sum must
// ignore the edge weight (weight 1), weighted sum and mean must multiply by
// it. out_valid must follow in_valid by exactly one cycle.
module tb_nme_exec_unit;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int N = NUM_PE * PE_LANES;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  red_op_e op;
  bf16_t edge_w;
  logic [N*16-1:0] x, psum, y;
  int checks = 0, failures = 0;

  nme_exec_unit dut (.clk, .rst_n, .in_valid, .op, .edge_w, .x, .psum, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, xs[N], ps[N], we;
    op = RED_SUM; edge_w = '0; x = '0; psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 120; it++) begin
      @(negedge clk);
      op = red_op_e'(it % 3);
      w  = int'($urandom_range(0, 4)) - 2;
      edge_w = int_to_bf16(w);
      we = (op == RED_SUM) ? 1 : w;
      for (int l = 0; l < N; l++) begin
        xs[l] = int'($urandom_range(0, 15)) - 7;
        ps[l] = int'($urandom_range(0, 63)) - 31;
        x[l*16 +: 16]    = int_to_bf16(xs[l]);
        psum[l*16 +: 16] = int_to_bf16(ps[l]);
      end
      in_valid = 1;
      checks++;
      if (out_valid) failures++;        // nothing in flight yet
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("out_valid missing one cycle after in_valid");
      end
      for (int l = 0; l < N; l++) begin
        checks++;
        if (bf16_to_int(y[l*16 +: 16]) != ps[l] + we * xs[l]) begin
          failures++;
          if (failures < 10)
            $display("op %0d lane %0d: got %0d want %0d", op, l,
                     bf16_to_int(y[l*16 +: 16]), ps[l] + we * xs[l]);
        end
      end
    end
    // a fractional weight as used for mean (1/4): 8 * 0.25 + 3 = 5
    @(negedge clk);
    op = RED_MEAN; edge_w = 16'h3E80;
    for (int l = 0; l < N; l++) begin
      x[l*16 +: 16] = int_to_bf16(8); psum[l*16 +: 16] = int_to_bf16(3);
    end
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    for (int l = 0; l < N; l++) begin
      checks++;
      if (bf16_to_int(y[l*16 +: 16]) != 5) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
