// tb_cae_result_fifo: checks the per-DIMM result FIFO of the CAE.
// Random pushes (never beyond the free count, as the memory controller's
// credits guarantee) and pops are compared with a queue model: head entry
// (first-word fall-through), valid and free count; the FIFO is driven to full
// and to empty.
module tb_cae_result_fifo;
  import gnnear_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, valid;
  result_t din, dout;
  logic [$clog2(DEPTH+1)-1:0] free;
  result_t q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  cae_result_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .valid, .free);

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
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      checks++;
      if (int'(free) != DEPTH - q.size() || valid != (q.size() > 0)) begin
        failures++;
        $display("status wrong: free %0d size %0d", free, q.size());
      end
      if (valid) begin
        checks++;
        if (dout != q[0]) begin
          failures++;
          $display("head wrong");
        end
      end
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      pop  = ($urandom_range(0, 99) < ((it / 300) % 2 == 0 ? 35 : 75));
      push = (free != '0 || (pop && valid)) && ($urandom_range(0, 99) < ((it / 300) % 2 == 0 ? 75 : 35));
      din.eoi = 1'($urandom);
      din.interval = 16'($urandom);
      din.dst = 8'($urandom);
      din.beat = 4'($urandom);
      for (int w = 0; w < BURST_W / 32; w++) din.data[w*32 +: 32] = $urandom;
      @(posedge clk);
      #1;
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    checks++;
    if (n_full == 0 || n_empty == 0) failures++;
    $display("full %0d empty %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
