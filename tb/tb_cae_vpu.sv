// tb_cae_vpu: checks the CAE vector-processing unit (32 cores x 16 lanes).
// Every operation is applied to random small-integer vectors (exact in BF16)
// and each lane is compared with integer arithmetic done here; the result
// must appear one cycle after the operands, with out_valid.
module tb_cae_vpu;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 32 * 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vop_e op;
  bf16_t s;
  bf16_t [N-1:0] a, b, c, y;

  cae_vpu dut (.clk, .rst_n, .in_valid, .op, .s, .a, .b, .c, .out_valid, .y);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model(input vop_e o, input int si, input int ai, input int bi, input int ci);
    unique case (o)
      VOP_ADD:   return ai + bi;
      VOP_MUL:   return ai * bi;
      VOP_FMA:   return ai * bi + ci;
      VOP_AXPY:  return si * ai + bi;
      VOP_RELU:  return ai > 0 ? ai : 0;
      VOP_DRELU: return ai > 0 ? bi : 0;
      VOP_SCALE: return si * ai;
      default:   return 0;
    endcase
  endfunction

  initial begin
    int si, ai [N], bi [N], ci [N];
    s = '0; a = '0; b = '0; c = '0; op = VOP_ADD;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 70; it++) begin
      @(negedge clk);
      op = vop_e'(it % 7);
      si = int'($urandom_range(0, 6)) - 3;
      s  = int_to_bf16(si);
      for (int l = 0; l < N; l++) begin
        ai[l] = int'($urandom_range(0, 14)) - 7;
        bi[l] = int'($urandom_range(0, 14)) - 7;
        ci[l] = int'($urandom_range(0, 40)) - 20;
        a[l] = int_to_bf16(ai[l]); b[l] = int_to_bf16(bi[l]); c[l] = int_to_bf16(ci[l]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < N; l++) begin
        checks++;
        if (bf16_to_int(y[l]) != model(op, si, ai[l], bi[l], ci[l])) begin
          failures++;
          if (failures < 10) $display("op %0d lane %0d: got %0d want %0d", op, l,
                                      bf16_to_int(y[l]), model(op, si, ai[l], bi[l], ci[l]));
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
