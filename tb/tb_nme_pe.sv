// tb_nme_pe: checks one PE of the NME execution unit.
// Random small-integer BF16 operands (exact in BF16) are applied; each lane
// must give psum + edge_w * x one cycle later, and hold its value while en is
// low.
module tb_nme_pe;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int L = PE_LANES;
  logic clk = 0, rst_n = 0, en = 0;
  bf16_t edge_w;
  logic [L*16-1:0] x, psum, y;
  int checks = 0, failures = 0;

  nme_pe dut (.clk, .rst_n, .en, .edge_w, .x, .psum, .y);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, xs[L], ps[L];
    logic [L*16-1:0] hold;
    edge_w = '0; x = '0; psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      w = int'($urandom_range(0, 7)) - 3;
      edge_w = int_to_bf16(w);
      for (int l = 0; l < L; l++) begin
        xs[l] = int'($urandom_range(0, 15)) - 7;
        ps[l] = int'($urandom_range(0, 63)) - 31;
        x[l*16 +: 16]    = int_to_bf16(xs[l]);
        psum[l*16 +: 16] = int_to_bf16(ps[l]);
      end
      en = 1;
      @(negedge clk);
      en = 0;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (bf16_to_int(y[l*16 +: 16]) != ps[l] + w * xs[l]) begin
          failures++;
          $display("lane %0d: got %0d want %0d", l, bf16_to_int(y[l*16 +: 16]), ps[l] + w * xs[l]);
        end
      end
      // en low: output must hold
      hold = y;
      x = ~x;
      @(negedge clk);
      checks++;
      if (y !== hold) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
