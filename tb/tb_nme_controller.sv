// tb_nme_controller: checks the NME controller with its data buffer, execution
// unit, two rank arbiters and two behavioural DRAM ranks around it.
// Instructions are given to the controller from a queue (as the instruction
// register would). Checked:
//  * L-type latency, measured from dispatch to the last burst of both ranks:
//    row miss at most tRC + tRCD + tCL + n*tBL, row hit at most
//    tCL + n*tBL (+ a small pipeline allowance), n = bursts per rank;
//    RD spacing of tBL and no DDR timing breach in the rank models;
//  * row-hit and row-miss counters;
//  * C-type accumulation for sum, weighted sum and mean, then R-type readout
//    of the destination in 64-byte beats against sums worked out from the
//    DRAM content, and that R-type clears the destination;
//  * inter-shard overlap: an L-type dispatched while C-types still compute;
//  * host bypass of ACT/RD/PRE for this DIMM, and ignoring another DIMM's;
//  * broadcast write: after a B-type a WR for another DIMM is stored here.
module tb_nme_controller;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [DIMM_W-1:0] my_dimm = 4'd3;

  logic [INST_W-1:0] q[$];
  logic              inst_valid, inst_pop;
  logic [INST_W-1:0] head;
  dec_inst_t         dec;
  ch_ca_t            ch_ca;
  logic [BURST_W-1:0] ch_wdata, ch_rdata;
  logic              ch_rvalid;
  rank_ca_t [NRANK-1:0] host_ca, nme_ca, rank_ca;
  logic     [NRANK-1:0] nme_gnt, host_win;
  logic [BURST_W-1:0] dram_wdata;
  logic [NRANK-1:0]   dram_rvalid;
  logic [NRANK-1:0][BURST_W-1:0] dram_rdata;
  logic               b_rd_en, b_wr_en;
  logic [$clog2(BUF_ROWS)-1:0] b_rd_addr, b_wr_addr;
  logic [ROW_BYTES*8-1:0] b_rd_data, b_wr_data;
  logic               e_valid, e_out_valid;
  red_op_e            e_op;
  bf16_t              e_w;
  logic [ROW_BYTES*8-1:0] e_x, e_psum, e_y;
  logic               init_done, busy;
  logic [31:0] c_ovl, c_hit, c_miss, c_bc, c_byp, c_drop;
  int viol [NRANK];
  int n_act [NRANK], n_rd [NRANK], n_wr [NRANK], n_pre [NRANK];

  int checks = 0, failures = 0;

  assign head       = q.size() > 0 ? q[0] : '0;
  assign inst_valid = q.size() > 0;

  nme_inst_decoder u_dec (.inst(head), .my_dimm, .dec);

  nme_controller dut (
    .clk, .rst_n, .my_dimm,
    .inst_valid, .inst(dec), .inst_pop,
    .ch_ca, .ch_wdata, .ch_rvalid, .ch_rdata,
    .host_ca, .nme_ca, .nme_gnt,
    .dram_wdata, .dram_rvalid, .dram_rdata,
    .buf_rd_en(b_rd_en), .buf_rd_addr(b_rd_addr), .buf_rd_data(b_rd_data),
    .buf_wr_en(b_wr_en), .buf_wr_addr(b_wr_addr), .buf_wr_data(b_wr_data),
    .eu_valid(e_valid), .eu_op(e_op), .eu_edge_w(e_w), .eu_x(e_x), .eu_psum(e_psum),
    .eu_out_valid(e_out_valid), .eu_y(e_y),
    .init_done, .busy,
    .cnt_overlap(c_ovl), .cnt_row_hit(c_hit), .cnt_row_miss(c_miss),
    .cnt_bcast_wr(c_bc), .cnt_bypass(c_byp), .cnt_dropped(c_drop)
  );

  for (genvar r = 0; r < NRANK; r++) begin : g_rank
    nme_arbiter u_arb (.clk, .rst_n, .host_ca(host_ca[r]), .nme_ca(nme_ca[r]),
                       .nme_gnt(nme_gnt[r]), .host_win(host_win[r]), .rank_ca(rank_ca[r]));
    dram_rank_model #(.SEED(r)) u_dram (
      .clk, .rst_n, .ca(rank_ca[r]), .wdata(dram_wdata),
      .rvalid(dram_rvalid[r]), .rdata(dram_rdata[r]),
      .violations(viol[r]), .n_act(n_act[r]), .n_rd(n_rd[r]), .n_wr(n_wr[r]), .n_pre(n_pre[r]));
  end

  nme_exec_unit u_eu (.clk, .rst_n, .in_valid(e_valid), .op(e_op), .edge_w(e_w), .x(e_x),
                      .psum(e_psum), .out_valid(e_out_valid), .y(e_y));
  nme_data_buffer u_buf (.clk, .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_data(b_rd_data),
                         .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data));

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- helpers
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint t_pop_last;
  always @(posedge clk) if (rst_n && inst_pop) begin
    t_pop_last <= cyc;
    void'(q.pop_front());
  end

  longint t_last_data;
  always @(posedge clk) if (|dram_rvalid) t_last_data <= cyc;

  // RD spacing on the NME path
  longint t_prev_rd [NRANK];
  int     rd_gap_bad = 0, n_rd_gaps = 0;
  always @(posedge clk) begin
    for (int r = 0; r < NRANK; r++)
      if (rank_ca[r].cmd == CMD_RD) begin
        if (cyc - t_prev_rd[r] < T_BL) rd_gap_bad++;
        n_rd_gaps++;
        t_prev_rd[r] = cyc;
      end
  end

  // collected channel beats
  logic [BURST_W-1:0] beats[$];
  always @(posedge clk) if (rst_n && ch_rvalid) beats.push_back(ch_rdata);

  function automatic logic [DADDR_W-1:0] vaddr(input int bank, input int row, input int col2);
    logic [DADDR_W-1:0] a;
    a = '0;
    a[17:14] = 4'(bank);
    a[13:12] = 2'(col2);
    a[11:9]  = 3'(row);
    a[39:24] = 16'(row >> 3);
    return a;
  endfunction

  // element e (0..255) of the 512-byte vector at (bank, row, col2)
  function automatic int elem(input int bank, input int row, input int col2, input int e);
    return dram_lane(e / 128, bank, row, col2 * 4 + (e % 128) / 32, e % 32);
  endfunction

  task automatic issue(input logic [INST_W-1:0] i);
    q.push_back(i);
  endtask

  task automatic wait_drain();
    while (q.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  task automatic host(input ddr_cmd_e cmd, input logic [DIMM_W-1:0] d, input bit rk,
                      input int bank, input int row, input int col,
                      input logic [BURST_W-1:0] wd);
    @(negedge clk);
    ch_ca = '0;
    ch_ca.cmd = cmd; ch_ca.dimm = d; ch_ca.rank = rk;
    ch_ca.bank = 4'(bank); ch_ca.row = 19'(row); ch_ca.col = 4'(col);
    ch_wdata = wd;
    @(negedge clk);
    ch_ca = '0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test
  initial begin
    longint t0;
    int exp5 [256], exp7 [256];
    int k0, miss0, hit0, ovl0, byp0;
    logic [BURST_W-1:0] wpat;
    ch_ca = '0; ch_wdata = '0;
    for (int r = 0; r < NRANK; r++) t_prev_rd[r] = -100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!init_done) @(posedge clk);
    check("init takes BUF_ROWS cycles", cyc >= BUF_ROWS && cyc <= BUF_ROWS + 8);

    // ---- L-type latency: closed bank (miss), same row (hit), other row (miss with PRE)
    miss0 = int'(c_miss);
    issue(mk_l(my_dimm, vaddr(2, 10, 0), 10'd512));
    wait_drain();
    check("miss latency", t_last_data - t_pop_last <= T_RC + T_RCD + T_CL + 4 * T_BL);
    check("miss latency lower bound", t_last_data - t_pop_last >= T_RCD + T_CL + 3 * T_BL);
    $display("L miss (closed bank): %0d cycles", t_last_data - t_pop_last);
    hit0 = int'(c_hit);
    issue(mk_l(my_dimm, vaddr(2, 10, 1), 10'd512));
    wait_drain();
    check("hit latency", t_last_data - t_pop_last <= T_CL + 4 * T_BL + 4);
    $display("L hit: %0d cycles", t_last_data - t_pop_last);
    check("row hit counted", int'(c_hit) == hit0 + 2);
    issue(mk_l(my_dimm, vaddr(2, 11, 0), 10'd512));
    wait_drain();
    check("conflict latency", t_last_data - t_pop_last <= T_RC + T_RCD + T_CL + 4 * T_BL);
    $display("L miss (row conflict): %0d cycles", t_last_data - t_pop_last);
    check("row miss counted", int'(c_miss) == miss0 + 4);
    check("RD spacing", rd_gap_bad == 0 && n_rd_gaps == 24);
    check("burst count", n_rd[0] == 12 && n_rd[1] == 12);

    // ---- C/R data path, with overlap of the second load
    ovl0 = int'(c_ovl);
    beats.delete();
    for (int e = 0; e < 256; e++) begin
      exp5[e] = 2 * elem(4, 20, 0, e) + elem(5, 33, 2, e) + elem(5, 33, 2, e);
      exp7[e] = elem(5, 33, 2, e);   // two edges to the same source, 1/n = 0.5 each
    end
    issue(mk_l(my_dimm, vaddr(4, 20, 0), 10'd512));
    issue(mk_c(my_dimm, RED_WSUM, int_to_bf16(2), 8'd5, 10'd512));
    for (int j = 0; j < 6; j++) issue(mk_c(my_dimm, RED_WSUM, int_to_bf16(0), 8'd9, 10'd512));
    issue(mk_l(my_dimm, vaddr(5, 33, 2), 10'd512));      // overlaps the C-types above
    issue(mk_c(my_dimm, RED_SUM, int_to_bf16(7), 8'd5, 10'd512));  // weight ignored
    issue(mk_c(my_dimm, RED_SUM, int_to_bf16(7), 8'd5, 10'd512));
    issue(mk_c(my_dimm, RED_MEAN, 16'h3F00, 8'd7, 10'd512));       // x * 0.5
    issue(mk_c(my_dimm, RED_MEAN, 16'h3F00, 8'd7, 10'd512));
    issue(mk_r(my_dimm, 8'd5, 10'd512));
    issue(mk_r(my_dimm, 8'd7, 10'd512));
    issue(mk_r(my_dimm, 8'd5, 10'd512));                  // cleared by the first R
    wait_drain();
    check("overlap happened", int'(c_ovl) > ovl0);
    check("beat count", beats.size() == 24);
    if (beats.size() == 24) begin
      for (int e = 0; e < 256; e++) begin
        check($sformatf("dst5[%0d]", e), bf16_to_int(beats[e / 32][(e % 32) * 16 +: 16]) == exp5[e]);
        check($sformatf("dst7[%0d]", e), bf16_to_int(beats[8 + e / 32][(e % 32) * 16 +: 16]) == exp7[e]);
        check($sformatf("cleared[%0d]", e), beats[16 + e / 32][(e % 32) * 16 +: 16] == 16'h0);
      end
    end

    // ---- short vector (128 B, rank 0 only) with a partial last row
    beats.delete();
    issue(mk_l(my_dimm, vaddr(6, 1, 0), 10'd128));
    issue(mk_c(my_dimm, RED_SUM, '0, 8'd200, 10'd128));
    issue(mk_r(my_dimm, 8'd200, 10'd128));
    wait_drain();
    check("short beats", beats.size() == 2);
    if (beats.size() == 2)
      for (int e = 0; e < 64; e++)
        check("short data", bf16_to_int(beats[e / 32][(e % 32) * 16 +: 16]) == elem(6, 1, 0, e));

    // ---- host bypass: ACT/RD/PRE to this DIMM, rank 1
    byp0 = int'(c_byp);
    k0 = n_act[1];
    beats.delete();
    host(CMD_ACT, my_dimm, 1, 9, 77, 0, '0);
    repeat (T_RCD) @(posedge clk);
    host(CMD_RD, my_dimm, 1, 9, 77, 5, '0);
    repeat (T_CL + 5) @(posedge clk);
    check("bypass read data", beats.size() == 1 && beats[0] == dram_word(1, 9, 77, 5));
    repeat (T_RAS) @(posedge clk);
    host(CMD_PRE, my_dimm, 1, 9, 0, 0, '0);
    host(CMD_ACT, 4'd1, 1, 12, 5, 0, '0);                 // other DIMM: ignored
    repeat (5) @(posedge clk);
    check("bypass count", int'(c_byp) == byp0 + 3);
    check("other DIMM ignored", n_act[1] == k0 + 1);

    // ---- broadcast write: B-type, then ACT/WR/PRE addressed to DIMM 1
    for (int l = 0; l < 32; l++) wpat[l*16 +: 16] = int_to_bf16(int'($urandom_range(0, 100)));
    issue(mk_b(10'd64));
    wait_drain();
    host(CMD_ACT, 4'd1, 0, 3, 40, 0, '0);
    repeat (T_RCD) @(posedge clk);
    host(CMD_WR, 4'd1, 0, 3, 40, 6, wpat);
    repeat (T_RAS) @(posedge clk);
    host(CMD_PRE, 4'd1, 0, 3, 0, 0, '0);
    repeat (T_RP) @(posedge clk);
    check("broadcast counted", c_bc == 1);
    check("broadcast stored", n_wr[0] == 1);
    // after the precharge the broadcast has ended: a WR to DIMM 1 is ignored
    host(CMD_ACT, 4'd1, 0, 3, 40, 0, '0);
    repeat (T_RCD) @(posedge clk);
    host(CMD_WR, 4'd1, 0, 3, 40, 7, ~wpat);
    repeat (5) @(posedge clk);
    check("broadcast ended", n_wr[0] == 1);
    // read the broadcast data back through a load + sum + readout
    beats.delete();
    issue(mk_l(my_dimm, vaddr(3, 40, 1) | 40'h80, 10'd64)); // col 6 = {01,10}
    issue(mk_c(my_dimm, RED_SUM, '0, 8'd1, 10'd64));
    issue(mk_r(my_dimm, 8'd1, 10'd64));
    wait_drain();
    check("broadcast data", beats.size() == 1 && beats[0] == wpat);

    check("no DRAM timing breach", viol[0] == 0 && viol[1] == 0);
    check("nothing dropped", c_drop == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
