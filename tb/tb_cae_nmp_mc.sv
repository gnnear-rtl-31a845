// tb_cae_nmp_mc: checks the CAE memory controller of one channel driving two
// real NMEs (DIMM 0 and 1), each with two behavioural DRAM ranks.
// Each DIMM gets a generated instruction stream: for every interval a few
// shards (one L-type, then C-types of random weights into a few
// destinations), then one R-type per destination used and an end-of-interval
// marker. DIMM 1 has three times the work of DIMM 0, so DIMM 0 runs ahead
// until the window (2 intervals) stops it. The result FIFOs are modelled
// here, drained at random speed, and win_base advances when every DIMM's
// marker for the oldest interval has been taken (as the window buffer does).
// Checked:
//  * every R-type's beats arrive tagged with the right DIMM, interval,
//    destination and beat, and hold the sum worked out from DRAM content;
//    so the fixed-latency issue rule never let a C-type use an unfinished
//    load or two R-types collide on the data bus;
//  * an end-of-interval marker follows all beats of its interval;
//  * the NMEs' instruction registers never overflow, no DRAM timing breach;
//  * window stalls and inter-shard overlap happen;
//  * write-back: a broadcast write is stored by both DIMMs, a plain write by
//    the addressed DIMM only, and the data read back through an NME match.
module tb_cae_nmp_mc;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int ND = 2, WIN = 2, NIVL = 5, FDEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic      [ND-1:0] s_valid, s_ready;
  mc_entry_t [ND-1:0] s_entry;
  logic [IVL_W-1:0] win_base;
  ch_ca_t ch_ca;
  logic [BURST_W-1:0] ch_wdata, ch_rdata;
  logic ch_rvalid;
  logic    [ND-1:0] res_push;
  result_t [ND-1:0] res_data;
  logic    [ND-1:0][4:0] res_free;
  logic wb_valid, wb_ready, wb_bcast;
  logic [DIMM_W-1:0] wb_dimm;
  logic [DADDR_W-1:0] wb_daddr;
  logic [BURST_W-1:0] wb_data;
  logic [31:0] cnt_inst, cnt_stall, cnt_wb;

  logic [ND-1:0] rv, init_done, busy, ireg_full;
  logic [ND-1:0][BURST_W-1:0] rd;
  rank_ca_t [ND-1:0][NRANK-1:0] rank_ca;
  logic [ND-1:0][BURST_W-1:0] rank_wdata;
  logic [ND-1:0][NRANK-1:0] rank_rvalid;
  logic [ND-1:0][NRANK-1:0][BURST_W-1:0] rank_rdata;
  logic [ND-1:0][31:0] c_ovl, c_hit, c_miss, c_bc, c_byp, c_drop;
  int viol [ND][NRANK], n_act [ND][NRANK], n_rd [ND][NRANK], n_wr [ND][NRANK], n_pre [ND][NRANK];

  cae_nmp_mc #(.DIMMS(ND), .WINDOW(WIN), .FIFO_CW(5)) dut (
    .clk, .rst_n, .s_valid, .s_entry, .s_ready, .win_base,
    .ch_ca, .ch_wdata, .ch_rvalid, .ch_rdata,
    .res_push, .res_data, .res_free,
    .wb_valid, .wb_ready, .wb_bcast, .wb_dimm, .wb_daddr, .wb_data,
    .cnt_inst, .cnt_window_stall(cnt_stall), .cnt_wb);

  for (genvar d = 0; d < ND; d++) begin : g_d
    nme u_nme (
      .clk, .rst_n, .my_dimm(DIMM_W'(d)), .ch_ca, .ch_wdata,
      .ch_rvalid(rv[d]), .ch_rdata(rd[d]),
      .rank_ca(rank_ca[d]), .rank_wdata(rank_wdata[d]),
      .rank_rvalid(rank_rvalid[d]), .rank_rdata(rank_rdata[d]),
      .init_done(init_done[d]), .busy(busy[d]), .ireg_full(ireg_full[d]),
      .cnt_overlap(c_ovl[d]), .cnt_row_hit(c_hit[d]), .cnt_row_miss(c_miss[d]),
      .cnt_bcast_wr(c_bc[d]), .cnt_bypass(c_byp[d]), .cnt_dropped(c_drop[d]));
    for (genvar r = 0; r < NRANK; r++) begin : g_r
      dram_rank_model #(.SEED(d * 2 + r)) u_dram (
        .clk, .rst_n, .ca(rank_ca[d][r]), .wdata(rank_wdata[d]),
        .rvalid(rank_rvalid[d][r]), .rdata(rank_rdata[d][r]),
        .violations(viol[d][r]), .n_act(n_act[d][r]), .n_rd(n_rd[d][r]),
        .n_wr(n_wr[d][r]), .n_pre(n_pre[d][r]));
    end
  end

  always_comb begin
    ch_rvalid = |rv;
    ch_rdata  = '0;
    for (int d = 0; d < ND; d++) if (rv[d]) ch_rdata = ch_rdata | rd[d];
  end

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic logic [DADDR_W-1:0] vaddr(input int bank, input int row, input int col2);
    logic [DADDR_W-1:0] a;
    a = '0;
    a[17:14] = 4'(bank);
    a[13:12] = 2'(col2);
    a[11:9]  = 3'(row);
    a[39:24] = 16'(row >> 3);
    return a;
  endfunction

  function automatic int elem(input int d, input int bank, input int row, input int col2, input int e);
    return dram_lane(d * 2 + e / 128, bank, row, col2 * 4 + (e % 128) / 32, e % 32);
  endfunction

  // ---------------------------------------------------------------- streams
  mc_entry_t strm [ND][$];
  int        exp_v [ND][NIVL][4][256];
  bit        used  [ND][NIVL][4];

  always_comb begin
    for (int d = 0; d < ND; d++) begin
      s_valid[d] = rst_n && init_done[d] && strm[d].size() > 0;
      s_entry[d] = strm[d].size() > 0 ? strm[d][0] : '0;
    end
  end
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < ND; d++) if (s_ready[d]) void'(strm[d].pop_front());

  // ---------------------------------------------------------------- FIFOs
  result_t fq [ND][$];
  bit eoi_taken [ND][NIVL];
  int nbeats [ND][NIVL][4];
  int n_res = 0, n_eoi = 0, ahead = 0;
  bit drain_on = 1;
  always_comb for (int d = 0; d < ND; d++) res_free[d] = 5'(FDEPTH - fq[d].size());

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) begin
      if (res_push[d]) begin
        check("FIFO not overflowing", fq[d].size() < FDEPTH);
        fq[d].push_back(res_data[d]);
      end
      if (drain_on && fq[d].size() > 0 && $urandom_range(0, 99) < 40) begin
        result_t r;
        r = fq[d].pop_front();
        if (r.eoi) begin
          eoi_taken[d][r.interval] = 1;
          for (int k = 0; k < 4; k++)
            if (used[d][r.interval][k]) check("all beats before marker", nbeats[d][r.interval][k] == 8);
          n_eoi++;
        end else begin
          check("beat in order", int'(r.beat) == nbeats[d][r.interval][r.dst]);
          check("destination used", used[d][r.interval][r.dst]);
          for (int l = 0; l < 32; l++)
            check("result value", bf16_to_int(r.data[l*16 +: 16]) ==
                                  exp_v[d][r.interval][r.dst][int'(r.beat) * 32 + l]);
          nbeats[d][r.interval][r.dst]++;
          n_res++;
        end
      end
    end
    if (int'(win_base) < NIVL) begin
      bit all;
      all = 1;
      for (int d = 0; d < ND; d++) all &= eoi_taken[d][win_base];
      if (all) win_base <= win_base + 1'b1;
    end
    if (eoi_taken[0][1] && !eoi_taken[1][0]) ahead++;
    for (int d = 0; d < ND; d++) check("no register overflow", !(ireg_full[d] && ch_ca.cmd == CMD_NMP));
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mc_entry_t m;
    logic [BURST_W-1:0] wp;
    int beats_total;
    win_base = '0;
    wb_valid = 0; wb_bcast = 0; wb_dimm = '0; wb_daddr = '0; wb_data = '0;
    // build the streams
    for (int d = 0; d < ND; d++)
      for (int i = 0; i < NIVL; i++) begin
        for (int k = 0; k < 4; k++) begin
          used[d][i][k] = 0;
          nbeats[d][i][k] = 0;
          for (int e = 0; e < 256; e++) exp_v[d][i][k][e] = 0;
        end
        eoi_taken[d][i] = 0;
        for (int sh = 0; sh < (d == 0 ? 1 : 3); sh++) begin
          int bank, row, col2;
          bank = int'($urandom_range(0, 15)); row = int'($urandom_range(0, 300));
          col2 = int'($urandom_range(0, 3));
          m = '0; m.interval = 16'(i); m.inst = mk_l(4'(d), vaddr(bank, row, col2), 10'd512);
          strm[d].push_back(m);
          for (int c = 0; c < 3; c++) begin
            int dst, w;
            dst = int'($urandom_range(0, 3)); w = int'($urandom_range(0, 2));
            used[d][i][dst] = 1;
            for (int e = 0; e < 256; e++) exp_v[d][i][dst][e] += w * elem(d, bank, row, col2, e);
            m.inst = mk_c(4'(d), RED_WSUM, int_to_bf16(w), 8'(dst), 10'd512);
            strm[d].push_back(m);
          end
        end
        for (int k = 0; k < 4; k++)
          if (used[d][i][k]) begin
            m = '0; m.interval = 16'(i); m.inst = mk_r(4'(d), 8'(k), 10'd512);
            strm[d].push_back(m);
          end
        m = '0; m.eoi = 1; m.interval = 16'(i);
        strm[d].push_back(m);
      end
    beats_total = 0;
    for (int d = 0; d < ND; d++)
      for (int i = 0; i < NIVL; i++)
        for (int k = 0; k < 4; k++) beats_total += used[d][i][k] ? 8 : 0;

    repeat (3) @(posedge clk);
    rst_n = 1;
    while (int'(win_base) < NIVL) @(posedge clk);
    repeat (10) @(posedge clk);
    check("all beats", n_res == beats_total);
    check("all markers", n_eoi == ND * NIVL);
    check("window stall happened", cnt_stall > 0);
    check("DIMM 0 ran ahead", ahead > 0);
    check("overlap happened", c_ovl[1] > 0);
    $display("instructions %0d, beats %0d, window stalls %0d, overlap %0d, cycles %0d",
             cnt_inst, n_res, cnt_stall, c_ovl[1], cyc);

    // ---- write-back: broadcast, then plain to DIMM 1
    for (int l = 0; l < 32; l++) wp[l*16 +: 16] = int_to_bf16(int'($urandom_range(1, 50)));
    drain_on = 0;
    @(negedge clk);
    wb_valid = 1; wb_bcast = 1; wb_dimm = 4'd0; wb_daddr = vaddr(9, 400, 1); wb_data = wp;
    @(posedge clk);
    while (!wb_ready) @(posedge clk);
    @(negedge clk);
    wb_bcast = 0; wb_dimm = 4'd1; wb_daddr = vaddr(9, 401, 1) | 40'h100; wb_data = ~wp;
    @(posedge clk);
    while (!wb_ready) @(posedge clk);
    @(negedge clk);
    wb_valid = 0;
    repeat (2) @(posedge clk);
    while (!wb_ready) @(posedge clk);
    check("broadcast stored in both", n_wr[0][0] == 1 && n_wr[1][0] == 1);
    check("plain write to DIMM 1 rank 1 only", n_wr[1][1] == 1 && n_wr[0][1] == 0);
    check("write-backs counted", cnt_wb == 2);
    // DIMM 0 loads the broadcast vector back, rank 0 col 4
    m = '0; m.interval = win_base; m.inst = mk_l(4'd0, vaddr(9, 400, 1), 10'd64);
    strm[0].push_back(m);
    m.inst = mk_c(4'd0, RED_SUM, '0, 8'd2, 10'd64);
    strm[0].push_back(m);
    m.inst = mk_r(4'd0, 8'd2, 10'd64);
    strm[0].push_back(m);
    fork
      begin
        while (fq[0].size() == 0) @(posedge clk);
        check("broadcast data read back", fq[0][0].data == wp && fq[0][0].dst == 8'd2);
      end
      begin
        repeat (3000) @(posedge clk);
        check("read-back arrived", 0);
      end
    join_any
    disable fork;
    for (int d = 0; d < ND; d++)
      for (int r = 0; r < NRANK; r++) check("DRAM timing", viol[d][r] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
