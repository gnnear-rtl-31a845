// tb_cae_window_buffer: checks the CAE window buffer with 3 DIMMs, a window
// of 2 intervals, 4 destinations per interval and 2 beats per vector.
// Each DIMM has a result FIFO model in the testbench fed with partial-result
// beats (small integers as BF16) and end-of-interval markers for 8 intervals.
// The DIMMs run at different random speeds, each may run at most WINDOW
// intervals ahead of the committed interval (as the memory controller
// enforces), so results of later intervals arrive before earlier ones are
// complete. Some (interval, dst, beat) words get no result at all.
// Checked: commits come out in interval order and, within an interval, in
// (dst, beat) order; every written word carries the sum of all DIMMs'
// contributions; unwritten words are not sent; win_base counts the
// committed intervals; out-of-order merges happened; c_ready back-pressure is
// respected.
module tb_cae_window_buffer;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int ND = 3, W = 2, S = 4, B = 2, NIVL = 8;
  localparam int LANES = BURST_W / 16;

  logic clk = 0, rst_n = 0;
  logic    [ND-1:0] f_valid, f_pop;
  result_t [ND-1:0] f_data;
  logic c_valid, c_ready;
  logic [IVL_W-1:0] c_interval, win_base;
  logic [DST_W-1:0] c_dst;
  logic [3:0] c_beat;
  logic [BURST_W-1:0] c_data;
  logic [31:0] cnt_merge, cnt_ooo, cnt_commit;

  cae_window_buffer #(.NUM_DIMM(ND), .WINDOW(W), .SHARD(S), .BEATS(B)) dut (
    .clk, .rst_n, .f_valid, .f_data, .f_pop,
    .c_valid, .c_ready, .c_interval, .c_dst, .c_beat, .c_data, .win_base,
    .cnt_merge, .cnt_ooo_merge(cnt_ooo), .cnt_commit);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // expected sums and "written" flags
  int exp_sum [NIVL][S][B][LANES];
  bit written [NIVL][S][B];

  // per-DIMM stream of result_t (all of it generated up front)
  result_t stream [ND][$];
  int      pos [ND];
  result_t fifo [ND][$];

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (interval %0d dst %0d beat %0d)", what, c_interval, c_dst, c_beat);
    end
  endtask

  // FIFO models (first-word fall-through)
  always_comb begin
    for (int d = 0; d < ND; d++) begin
      f_valid[d] = fifo[d].size() > 0;
      f_data[d]  = f_valid[d] ? fifo[d][0] : '0;
    end
  end

  int n_pushed = 0;
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) begin
      if (f_pop[d]) void'(fifo[d].pop_front());
      // a DIMM delivers at random speed, within the window
      if (pos[d] < stream[d].size() && $urandom_range(0, 99) < 20 + 30 * d &&
          int'(stream[d][pos[d]].interval) < int'(win_base) + W) begin
        fifo[d].push_back(stream[d][pos[d]]);
        pos[d]++;
      end
    end
  end

  // commit checker
  int exp_ivl = 0, exp_k = 0, n_words = 0, n_bp = 0;
  always @(posedge clk) if (rst_n) begin
    c_ready <= ($urandom_range(0, 3) != 0);
    if (c_valid && !c_ready) n_bp++;
    if (c_valid && c_ready) begin
      int k;
      k = int'(c_dst) * B + int'(c_beat);
      check("interval order", int'(c_interval) == exp_ivl || int'(c_interval) > exp_ivl);
      if (int'(c_interval) > exp_ivl) begin
        exp_ivl = int'(c_interval);
        exp_k = 0;
      end
      check("word order", k >= exp_k);
      check("word was written", written[c_interval][c_dst][c_beat]);
      for (int l = 0; l < LANES; l++)
        check("sum", bf16_to_int(c_data[l*16 +: 16]) == exp_sum[c_interval][c_dst][c_beat][l]);
      written[c_interval][c_dst][c_beat] = 0;   // each word once
      exp_k = k + 1;
      n_words++;
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    result_t r;
    int n_written = 0;
    for (int i = 0; i < NIVL; i++)
      for (int s = 0; s < S; s++)
        for (int b = 0; b < B; b++) begin
          written[i][s][b] = 0;
          for (int l = 0; l < LANES; l++) exp_sum[i][s][b][l] = 0;
        end
    for (int d = 0; d < ND; d++) begin
      pos[d] = 0;
      for (int i = 0; i < NIVL; i++) begin
        for (int s = 0; s < S; s++)
          for (int b = 0; b < B; b++)
            if ($urandom_range(0, 2) != 0 && !(s == 3 && b == 1)) begin   // (3,1) never written
              r = '0;
              r.interval = 16'(i); r.dst = 8'(s); r.beat = 4'(b);
              for (int l = 0; l < LANES; l++) begin
                int v;
                v = int'($urandom_range(0, 20));
                r.data[l*16 +: 16] = int_to_bf16(v);
                exp_sum[i][s][b][l] += v;
              end
              written[i][s][b] = 1;
              stream[d].push_back(r);
            end
        r = '0; r.eoi = 1; r.interval = 16'(i);
        stream[d].push_back(r);
      end
    end
    for (int i = 0; i < NIVL; i++)
      for (int s = 0; s < S; s++)
        for (int b = 0; b < B; b++) n_written += written[i][s][b];
    c_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (int'(win_base) < NIVL) @(posedge clk);
    repeat (5) @(posedge clk);
    check("all words committed", n_words == n_written);
    check("commit count", cnt_commit == NIVL);
    check("out-of-order merges seen", cnt_ooo > 0);
    check("back-pressure seen", n_bp > 0);
    $display("words %0d merges %0d out-of-order %0d", n_words, cnt_merge, cnt_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
