// tb_nme_inst_register: checks the NME instruction register (FIFO of 8).
// Random pushes and pops are compared with a queue model: order of the
// instructions, count, valid and full. Pops happen only when valid and pushes
// only when not full (the assertion in the FIFO guards the latter).
module tb_nme_inst_register;
  import gnnear_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, valid, full;
  logic [INST_W-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [INST_W-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0;

  nme_inst_register #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .valid, .full, .count);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || valid != (q.size() != 0) || full != (q.size() == DEPTH)) begin
        failures++;
        $display("status: count %0d want %0d", count, q.size());
      end
      if (valid) begin
        checks++;
        if (dout !== q[0]) begin
          failures++;
          $display("head mismatch");
        end
      end
      if (full) n_full++;
      push = !full && ($urandom_range(0, 99) < ((it / 500) % 2 == 0 ? 70 : 30));
      pop  = valid && ($urandom_range(0, 99) < ((it / 500) % 2 == 0 ? 30 : 70));
      din  = {24'($urandom), 32'($urandom)};
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("FIFO never became full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
