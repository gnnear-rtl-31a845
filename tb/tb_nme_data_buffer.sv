// tb_nme_data_buffer: checks the NME data buffer (1024 rows of 256 bytes).
// Writes random rows at random addresses, keeps a reference copy, reads them
// back and checks data and the one-cycle read latency; also a read and a
// write of the same row in one cycle (old data returned).
module tb_nme_data_buffer;
  import gnnear_pkg::*;

  localparam int W = ROW_BYTES * 8;
  localparam int D = BUF_ROWS;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [$clog2(D)-1:0] rd_addr, wr_addr;
  logic [W-1:0] rd_data, wr_data;
  logic [W-1:0] ref_mem [D];
  logic [D-1:0] written;
  int checks = 0, failures = 0;

  nme_data_buffer dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int i = 0; i < W / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    logic [W-1:0] old;
    int a;
    written = '0;
    rd_addr = '0; wr_addr = '0; wr_data = '0;
    @(negedge clk);
    for (int it = 0; it < 600; it++) begin
      wr_en = 1;
      wr_addr = $clog2(D)'($urandom_range(0, D - 1));
      wr_data = rnd_row();
      ref_mem[wr_addr] = wr_data;
      written[wr_addr] = 1'b1;
      @(negedge clk);
    end
    wr_en = 0;
    for (int it = 0; it < 600; it++) begin
      do a = int'($urandom_range(0, D - 1)); while (!written[a]);
      rd_en = 1; rd_addr = $clog2(D)'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("row %0d read back wrong", a);
      end
    end
    // read-during-write of the same row returns the old content
    do a = int'($urandom_range(0, D - 1)); while (!written[a]);
    old = ref_mem[a];
    rd_en = 1; rd_addr = $clog2(D)'(a);
    wr_en = 1; wr_addr = $clog2(D)'(a); wr_data = ~old;
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    checks++;
    if (rd_data !== old) failures++;
    rd_en = 1;
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (rd_data !== ~old) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
