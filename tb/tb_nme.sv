// tb_nme: checks two Near-Memory Engines (DIMM 0 and DIMM 1) sharing one
// channel, each with two behavioural DRAM ranks, driven only through the
// channel command bus as the CAE memory controller would drive them.
//  * GNNear instructions travel as CMD_NMP commands; each NME executes only
//    its own and drops the other DIMM's;
//  * the instruction register fills up (full seen) while C-types wait for a
//    load, and no instruction is lost;
//  * both NMEs aggregate different source vectors into their destinations;
//    R-type results come back on each NME's data output, never both at once,
//    and are compared with sums worked out from the DRAM content;
//  * a C-type with the reserved Op code is dropped;
//  * a broadcast write (B-type, then ACT/WR/PRE to DIMM 1) is stored by both
//    DIMMs; a plain write afterwards only by the addressed one.
module tb_nme;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int ND = 2;
  logic clk = 0, rst_n = 0;
  ch_ca_t ch_ca;
  logic [BURST_W-1:0] ch_wdata;
  logic [ND-1:0] rvalid, init_done, busy, ireg_full;
  logic [ND-1:0][BURST_W-1:0] rdata;
  rank_ca_t [ND-1:0][NRANK-1:0] rank_ca;
  logic [ND-1:0][BURST_W-1:0] rank_wdata;
  logic [ND-1:0][NRANK-1:0] rank_rvalid;
  logic [ND-1:0][NRANK-1:0][BURST_W-1:0] rank_rdata;
  logic [ND-1:0][31:0] c_ovl, c_hit, c_miss, c_bc, c_byp, c_drop;
  int viol [ND][NRANK], n_act [ND][NRANK], n_rd [ND][NRANK], n_wr [ND][NRANK], n_pre [ND][NRANK];
  int checks = 0, failures = 0;

  for (genvar d = 0; d < ND; d++) begin : g_d
    nme dut (
      .clk, .rst_n, .my_dimm(DIMM_W'(d)), .ch_ca, .ch_wdata,
      .ch_rvalid(rvalid[d]), .ch_rdata(rdata[d]),
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

  always #5 clk = ~clk;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [BURST_W-1:0] beats [ND][$];
  int both_drive = 0, full_seen = 0;
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) if (rvalid[d]) beats[d].push_back(rdata[d]);
    if (&rvalid) both_drive++;
    if (ireg_full[0]) full_seen++;
  end

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
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

  // send one channel command; instructions wait while the register is full
  task automatic send(input ch_ca_t c, input logic [BURST_W-1:0] wd = '0);
    @(negedge clk);
    while (c.cmd == CMD_NMP && |ireg_full) @(negedge clk);
    ch_ca = c; ch_wdata = wd;
    @(negedge clk);
    ch_ca = '0;
  endtask

  task automatic inst(input logic [INST_W-1:0] i);
    ch_ca_t c;
    c = '0; c.cmd = CMD_NMP; c.inst = i;
    send(c);
  endtask

  task automatic cmd(input ddr_cmd_e k, input int d, input int rk, input int bank,
                     input int row, input int col, input logic [BURST_W-1:0] wd = '0);
    ch_ca_t c;
    c = '0; c.cmd = k; c.dimm = 4'(d); c.rank = 1'(rk);
    c.bank = 4'(bank); c.row = 19'(row); c.col = 4'(col);
    send(c, wd);
  endtask

  task automatic drain();
    repeat (6) @(posedge clk);
    while (|busy) @(posedge clk);
    repeat (6) @(posedge clk);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp0 [256], exp1 [256];
    logic [BURST_W-1:0] wpat;
    ch_ca = '0; ch_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(&init_done)) @(posedge clk);

    // DIMM 0: dst 3 = 3*X(a) + X(b); DIMM 1: dst 3 = X(c)
    for (int e = 0; e < 256; e++) begin
      exp0[e] = 3 * elem(0, 1, 100, 0, e) + elem(0, 7, 9, 3, e);
      exp1[e] = elem(1, 2, 50, 1, e);
    end
    inst(mk_l(4'd0, vaddr(1, 100, 0), 10'd512));
    inst(mk_l(4'd1, vaddr(2, 50, 1), 10'd512));
    inst(mk_c(4'd0, RED_WSUM, int_to_bf16(3), 8'd3, 10'd512));
    for (int j = 0; j < 8; j++)                                  // fills DIMM 0's register
      inst(mk_c(4'd0, RED_WSUM, '0, 8'(10 + j), 10'd512));
    inst(mk_c(4'd1, RED_SUM, '0, 8'd3, 10'd512));
    inst(mk_l(4'd0, vaddr(7, 9, 3), 10'd512));
    inst(mk_c(4'd0, RED_SUM, '0, 8'd3, 10'd512));
    inst(mk_c(4'd0, RED_RSVD, '0, 8'd3, 10'd512));              // reserved Op: dropped
    drain();
    inst(mk_r(4'd0, 8'd3, 10'd512));
    repeat (12) @(posedge clk);       // the channel data bus carries one R-type at a time
    inst(mk_r(4'd1, 8'd3, 10'd512));
    drain();
    check("register full seen", full_seen > 0);
    check("one driver at a time", both_drive == 0);
    check("beats DIMM 0", beats[0].size() == 8);
    check("beats DIMM 1", beats[1].size() == 8);
    if (beats[0].size() == 8 && beats[1].size() == 8)
      for (int e = 0; e < 256; e++) begin
        check("DIMM 0 data", bf16_to_int(beats[0][e / 32][(e % 32) * 16 +: 16]) == exp0[e]);
        check("DIMM 1 data", bf16_to_int(beats[1][e / 32][(e % 32) * 16 +: 16]) == exp1[e]);
      end
    // each NME drops the other's instructions, DIMM 0 also the reserved one
    check("DIMM 0 dropped", c_drop[0] == 32'd4);
    check("DIMM 1 dropped", c_drop[1] == 32'd14);

    // broadcast write to both DIMMs, then a plain write to DIMM 1 only
    for (int l = 0; l < 32; l++) wpat[l*16 +: 16] = int_to_bf16(int'($urandom_range(0, 60)));
    inst(mk_b(10'd64));
    repeat (4) @(posedge clk);
    cmd(CMD_ACT, 1, 1, 4, 200, 0);
    repeat (T_RCD) @(posedge clk);
    cmd(CMD_WR, 1, 1, 4, 200, 2, wpat);
    repeat (T_RAS) @(posedge clk);
    cmd(CMD_PRE, 1, 1, 4, 0, 0);
    repeat (T_RP) @(posedge clk);
    cmd(CMD_ACT, 1, 1, 4, 200, 0);
    repeat (T_RCD) @(posedge clk);
    cmd(CMD_WR, 1, 1, 4, 200, 3, ~wpat);
    repeat (T_RAS) @(posedge clk);
    cmd(CMD_PRE, 1, 1, 4, 0, 0);
    repeat (T_RP) @(posedge clk);
    check("broadcast reached DIMM 0", n_wr[0][1] == 1 && c_bc[0] == 1);
    check("plain write only to DIMM 1", n_wr[1][1] == 2);
    // DIMM 0 reads the broadcast vector back (rank 1 = bytes 256..319)
    beats[0].delete();
    inst(mk_l(4'd0, vaddr(4, 200, 0) | 40'h80, 10'd320));
    inst(mk_c(4'd0, RED_SUM, '0, 8'd99, 10'd320));
    inst(mk_r(4'd0, 8'd99, 10'd320));
    drain();
    check("broadcast data beats", beats[0].size() == 5);
    if (beats[0].size() == 5) check("broadcast data", beats[0][4] == wpat);

    for (int d = 0; d < ND; d++)
      for (int r = 0; r < NRANK; r++) check("DRAM timing", viol[d][r] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
