// tb_cae_scratchpad: checks the CAE scratchpad at 64 KB with 8 banks.
// Both ports read and write random words at random addresses, often in the
// same bank and sometimes the same word, against a reference model: read
// data one cycle after the request, reads return the old word, port A wins a
// same-word write collision. The whole memory is first written and read
// back through both ports, so every word of every bank is reached.
module tb_cae_scratchpad;
  localparam int BYTES = 64 * 1024, WB = 64, WORDS = BYTES / WB, AW = $clog2(WORDS);
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr, b_addr;
  logic [511:0] a_wdata, b_wdata, a_rdata, b_rdata;

  cae_scratchpad #(.BYTES(BYTES), .BANKS(8), .WORD_BYTES(WB)) dut (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  logic [511:0] mem [WORDS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  function automatic logic [511:0] rnd();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] ea, eb;
    bit ra, rb;
    a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    // fill everything through alternating ports
    for (int i = 0; i < WORDS; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i);     a_wdata = rnd(); mem[i]   = a_wdata;
      b_en = 1; b_we = 1; b_addr = AW'(i + 1); b_wdata = rnd(); mem[i+1] = b_wdata;
    end
    @(negedge clk);
    a_en = 0; b_en = 0;
    // read the whole content back through both ports
    for (int i = 0; i < WORDS; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 0; a_addr = AW'(i + 1);
      b_en = 1; b_we = 0; b_addr = AW'(i);
      @(negedge clk);
      a_en = 0; b_en = 0;
      checks++;
      if (a_rdata !== mem[i + 1] || b_rdata !== mem[i]) failures++;
    end
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 3) != 0; a_we = $urandom_range(0, 2) == 0;
      b_en = $urandom_range(0, 3) != 0; b_we = $urandom_range(0, 2) == 0;
      a_addr = AW'($urandom_range(0, 63));
      b_addr = ($urandom_range(0, 3) == 0) ? a_addr : AW'($urandom_range(0, 63));
      a_wdata = rnd(); b_wdata = rnd();
      ra = a_en && !a_we; rb = b_en && !b_we;
      ea = mem[a_addr]; eb = mem[b_addr];
      if (b_en && b_we) mem[b_addr] = b_wdata;
      if (a_en && a_we) mem[a_addr] = a_wdata;
      @(negedge clk);
      a_en = 0; b_en = 0;
      if (ra) begin
        checks++;
        if (a_rdata !== ea) failures++;
      end
      if (rb) begin
        checks++;
        if (b_rdata !== eb) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
