// tb_gnnear_top_full: the end-to-end test of tb_gnnear_top with the
// accelerator at its full default configuration: 4 channels x 4 DIMMs x 2
// ranks, shard of 128 destinations, window of 4 intervals, 128x128 GEMM,
// 32 SIMD-16 VPU cores and a 16 MB scratchpad with 8 banks. The graph is
// 64 source vertices and 6 intervals of 128 destinations; the phases and
// checks are those of tb_gnnear_top.
module tb_gnnear_top_full;
  import gnnear_pkg::*;
  import tb_util_pkg::*;

  localparam int NUM_CH = 4, DIMMS = 4, WINDOW = 4, SHARD = 128, BEATS = 8, FIFO_DEPTH = 64;
  localparam int GR = 128, GC = 128, VC = 32, VL = 16, SPM = 16 * 1024 * 1024, SPMB = 8;
  localparam int NIVL = 6, NSRC = 64, ND = NUM_CH * DIMMS;
  localparam int SAW = $clog2(SPM / 64);
  localparam int NE = BEATS * 32;    // BF16 elements per vector

  logic clk = 0, rst_n = 0;
  logic      [NUM_CH-1:0][DIMMS-1:0] s_valid, s_ready;
  mc_entry_t [NUM_CH-1:0][DIMMS-1:0] s_entry;
  logic      [NUM_CH-1:0] wb_valid, wb_ready, wb_bcast;
  logic      [NUM_CH-1:0][DIMM_W-1:0] wb_dimm;
  logic      [NUM_CH-1:0][DADDR_W-1:0] wb_daddr;
  logic      [NUM_CH-1:0][BURST_W-1:0] wb_data;
  rank_ca_t  [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0] rank_ca;
  logic      [NUM_CH-1:0][DIMMS-1:0][BURST_W-1:0] rank_wdata;
  logic      [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0] rank_rvalid;
  logic      [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0][BURST_W-1:0] rank_rdata;
  logic      [SAW-1:0] res_base, spm_b_addr;
  logic      [IVL_W-1:0] win_base;
  logic      spm_b_en, spm_b_we;
  logic      [BURST_W-1:0] spm_b_wdata, spm_b_rdata;
  logic      gemm_w_load, gemm_a_valid, gemm_y_valid;
  logic      [$clog2(GR)-1:0] gemm_w_row;
  bf16_t     [GC-1:0] gemm_w_vec, gemm_y_vec;
  bf16_t     [GR-1:0] gemm_a_vec;
  logic      vpu_in_valid, vpu_out_valid;
  vop_e      vpu_op;
  bf16_t     vpu_s;
  bf16_t     [VC*VL-1:0] vpu_a, vpu_b, vpu_c, vpu_y;
  logic      init_done;
  logic [31:0] cnt_overlap, cnt_row_hit, cnt_row_miss, cnt_bcast_wr, cnt_bypass, cnt_dropped;
  logic [31:0] cnt_inst, cnt_window_stall, cnt_wb, cnt_merge, cnt_ooo_merge, cnt_commit;

  gnnear_top dut (.*);

  int viol [ND][NRANK], n_act [ND][NRANK], n_rd [ND][NRANK], n_wr [ND][NRANK], n_pre [ND][NRANK];
  for (genvar c = 0; c < NUM_CH; c++) begin : g_c
    for (genvar d = 0; d < DIMMS; d++) begin : g_d
      for (genvar r = 0; r < NRANK; r++) begin : g_r
        dram_rank_model #(.SEED((c * DIMMS + d) * 2 + r)) u_dram (
          .clk, .rst_n, .ca(rank_ca[c][d][r]), .wdata(rank_wdata[c][d]),
          .rvalid(rank_rvalid[c][d][r]), .rdata(rank_rdata[c][d][r]),
          .violations(viol[c*DIMMS+d][r]), .n_act(n_act[c*DIMMS+d][r]),
          .n_rd(n_rd[c*DIMMS+d][r]), .n_wr(n_wr[c*DIMMS+d][r]), .n_pre(n_pre[c*DIMMS+d][r]));
      end
    end
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

  // ---------------------------------------------------------------- graph
  // source vertex u: DIMM u % ND, slot idx = u / ND -> column idx%4, bank
  // (idx/4)%16, row idx/64 + 1, so four sources share each DRAM row
  function automatic logic [DADDR_W-1:0] src_addr(input int u);
    int idx, row;
    logic [DADDR_W-1:0] a;
    idx = u / ND;
    row = idx / 64 + 1;
    a = '0;
    a[13:12] = 2'(idx % 4);
    a[17:14] = 4'((idx / 4) % 16);
    a[11:9]  = 3'(row);
    a[39:24] = 16'(row >> 3);
    return a;
  endfunction

  function automatic int x_elem(input int u, input int e);
    int g, idx;
    g = u % ND;
    idx = u / ND;
    return dram_lane(g * 2 + e / 128, (idx / 4) % 16, idx / 64 + 1, (idx % 4) * 4 + (e % 128) / 32, e % 32);
  endfunction

  int        deg  [NIVL][SHARD];
  int        esrc [NIVL][SHARD][3];
  int        ew   [NIVL][SHARD][3];
  mc_entry_t strm [ND][$];
  int        n_empty = 0;

  always_comb begin
    for (int c = 0; c < NUM_CH; c++)
      for (int d = 0; d < DIMMS; d++) begin
        s_valid[c][d] = strm[c*DIMMS+d].size() > 0;
        s_entry[c][d] = strm[c*DIMMS+d].size() > 0 ? strm[c*DIMMS+d][0] : '0;
      end
  end
  always @(posedge clk) if (rst_n)
    for (int g = 0; g < ND; g++) if (s_ready[g / DIMMS][g % DIMMS]) void'(strm[g].pop_front());

  task automatic build_interval(input int i);
    for (int g = 0; g < ND; g++) begin
      mc_entry_t m;
      bit touched [SHARD];
      bit any;
      any = 0;
      for (int k = 0; k < SHARD; k++) touched[k] = 0;
      for (int u = g; u < NSRC; u += ND) begin
        bit has;
        has = 0;
        for (int k = 0; k < SHARD; k++)
          for (int j = 0; j < deg[i][k]; j++) if (esrc[i][k][j] == u) has = 1;
        if (has) begin
          m = '0; m.interval = 16'(i); m.inst = mk_l(4'(g % DIMMS), src_addr(u), 10'(NE * 2));
          strm[g].push_back(m);
          for (int k = 0; k < SHARD; k++)
            for (int j = 0; j < deg[i][k]; j++)
              if (esrc[i][k][j] == u) begin
                m.inst = mk_c(4'(g % DIMMS), RED_WSUM, int_to_bf16(ew[i][k][j]), 8'(k), 10'(NE * 2));
                strm[g].push_back(m);
                touched[k] = 1;
                any = 1;
              end
        end
      end
      for (int k = 0; k < SHARD; k++)
        if (touched[k]) begin
          m = '0; m.interval = 16'(i); m.inst = mk_r(4'(g % DIMMS), 8'(k), 10'(NE * 2));
          strm[g].push_back(m);
        end
      if (!any) n_empty++;
      m = '0; m.eoi = 1; m.interval = 16'(i);
      strm[g].push_back(m);
    end
  endtask

  task automatic spm_read(input int addr, output logic [BURST_W-1:0] data);
    @(negedge clk);
    spm_b_en = 1; spm_b_we = 0; spm_b_addr = SAW'(addr);
    @(negedge clk);
    spm_b_en = 0;
    data = spm_b_rdata;
  endtask

  task automatic wait_commit(input int n);
    while (int'(win_base) < n) @(posedge clk);
    repeat (SHARD * BEATS * 2 + 10) @(posedge clk);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BURST_W-1:0] w, wp;
    int n_vals, n_gemm, n_vpu, ivl_empty_done;
    bf16_t [GR-1:0] av;
    wb_valid = '0; wb_bcast = '0; wb_dimm = '0; wb_daddr = '0; wb_data = '0;
    res_base = SAW'(64);
    spm_b_en = 0; spm_b_we = 0; spm_b_addr = '0; spm_b_wdata = '0;
    gemm_w_load = 0; gemm_w_row = '0; gemm_w_vec = '0; gemm_a_valid = 0; gemm_a_vec = '0;
    vpu_in_valid = 0; vpu_op = VOP_ADD; vpu_s = '0; vpu_a = '0; vpu_b = '0; vpu_c = '0;

    // ---- graph (interval 1 only draws on DIMM 0's vertices, so the other
    //      DIMMs skip it as an empty shard)
    for (int i = 0; i < NIVL; i++)
      for (int k = 0; k < SHARD; k++) begin
        deg[i][k] = int'($urandom_range(0, 3));
        if (i == 0 && k == 0) deg[i][k] = 3;
        for (int j = 0; j < deg[i][k]; j++) begin
          int u;
          bit dup;
          do begin
            u = (i == 1) ? ND * int'($urandom_range(0, NSRC / ND - 1)) : int'($urandom_range(0, NSRC - 1));
            dup = 0;
            for (int jj = 0; jj < j; jj++) if (esrc[i][k][jj] == u) dup = 1;
          end while (dup);
          esrc[i][k][j] = u;
          ew[i][k][j]   = int'($urandom_range(1, 2));
        end
      end
    for (int i = 0; i < NIVL; i++) build_interval(i);

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- phase 1: aggregation
    wait_commit(NIVL);
    n_vals = 0;
    for (int i = 0; i < NIVL; i++)
      for (int k = 0; k < SHARD; k++)
        if (deg[i][k] > 0)
          for (int b = 0; b < BEATS; b++) begin
            spm_read(64 + (i * SHARD + k) * BEATS + b, w);
            for (int l = 0; l < 32; l++) begin
              int e, want;
              e = b * 32 + l;
              want = 0;
              for (int j = 0; j < deg[i][k]; j++) want += ew[i][k][j] * x_elem(esrc[i][k][j], e);
              check("aggregated value", bf16_to_int(w[l*16 +: 16]) == want);
              n_vals++;
            end
          end
    $display("phase 1: %0d values checked, %0d cycles, %0d instructions", n_vals, cyc, cnt_inst);

    // ---- phase 2: write-back of one vector: broadcast on channel 0, plain on channel 1
    for (int l = 0; l < 32; l++) wp[l*16 +: 16] = int_to_bf16(int'($urandom_range(1, 40)));
    @(negedge clk);
    wb_valid[1:0] = 2'b11; wb_bcast[1:0] = 2'b01; wb_dimm[0] = 4'd0; wb_dimm[1] = 4'd1;
    wb_daddr[0] = src_addr(ND * 200); wb_daddr[1] = src_addr(ND * 200);
    wb_data[0] = wp; wb_data[1] = wp;
    fork
      begin
        @(posedge clk);
        while (!wb_ready[0]) @(posedge clk);
        @(negedge clk);
        wb_valid[0] = 0;
      end
      begin
        @(posedge clk);
        while (!wb_ready[1]) @(posedge clk);
        @(negedge clk);
        wb_valid[1] = 0;
      end
    join
    repeat (4) @(posedge clk);
    while (wb_ready[1:0] != 2'b11) @(posedge clk);

    // ---- phase 3: the three copies are loaded and merged in interval NIVL
    for (int g = 0; g < ND; g++) begin
      mc_entry_t m;
      m = '0; m.interval = 16'(NIVL);
      if (g < DIMMS || g == DIMMS + 1) begin
        m.inst = mk_l(4'(g % DIMMS), src_addr(ND * 200), 10'd64);
        strm[g].push_back(m);
        m.inst = mk_c(4'(g % DIMMS), RED_SUM, '0, 8'd1, 10'd64);
        strm[g].push_back(m);
        m.inst = mk_r(4'(g % DIMMS), 8'd1, 10'd64);
        strm[g].push_back(m);
      end
      m = '0; m.eoi = 1; m.interval = 16'(NIVL);
      strm[g].push_back(m);
    end
    wait_commit(NIVL + 1);
    spm_read(64 + (NIVL * SHARD + 1) * BEATS, w);
    for (int l = 0; l < 32; l++)
      check("write-back copies merged",
            bf16_to_int(w[l*16 +: 16]) == (DIMMS + 1) * bf16_to_int(wp[l*16 +: 16]));

    // ---- phase 4: Update step on one aggregated vector
    for (int b = 0; b < (GR + 31) / 32; b++) begin
      spm_read(64 + b, w);
      for (int i = b * 32; i < GR && i < b * 32 + 32; i++) av[i] = w[(i % 32)*16 +: 16];
    end
    for (int i = 0; i < GR; i++) begin
      @(negedge clk);
      gemm_w_load = 1; gemm_w_row = $clog2(GR)'(i);
      for (int j = 0; j < GC; j++) gemm_w_vec[j] = (i == (3 * j + 1) % GR) ? BF16_ONE : BF16_ZERO;
    end
    @(negedge clk);
    gemm_w_load = 0;
    gemm_a_valid = 1; gemm_a_vec = av;
    @(negedge clk);
    gemm_a_valid = 0;
    n_gemm = 0;
    while (!gemm_y_valid) @(negedge clk);
    n_gemm++;
    for (int j = 0; j < GC; j++) check("GEMM", gemm_y_vec[j] == av[(3 * j + 1) % GR]);
    vpu_op = VOP_FMA; vpu_in_valid = 1;
    for (int l = 0; l < VC * VL; l++) begin
      vpu_a[l] = (l < GC) ? gemm_y_vec[l] : BF16_ZERO;
      vpu_b[l] = int_to_bf16(2);
      vpu_c[l] = BF16_ONE;
    end
    @(negedge clk);
    vpu_in_valid = 0;
    n_vpu = 0;
    if (vpu_out_valid) n_vpu++;
    for (int l = 0; l < VC * VL; l++)
      check("VPU", bf16_to_int(vpu_y[l]) == 2 * bf16_to_int(vpu_a[l]) + 1);

    // ---- mechanisms
    $display("overlap %0d row-hit %0d row-miss %0d broadcast-wr %0d bypass %0d window-stall %0d",
             cnt_overlap, cnt_row_hit, cnt_row_miss, cnt_bcast_wr, cnt_bypass, cnt_window_stall);
    $display("merges %0d out-of-order %0d commits %0d empty-shards %0d write-backs %0d gemm %0d vpu %0d",
             cnt_merge, cnt_ooo_merge, cnt_commit, n_empty, cnt_wb, n_gemm, n_vpu);
    check("overlap happened", cnt_overlap > 0);
    check("row hit happened", cnt_row_hit > 0);
    check("row miss happened", cnt_row_miss > 0);
    check("broadcast write happened", cnt_bcast_wr == DIMMS);
    check("bypass happened", cnt_bypass > 0);
    check("window stall happened", cnt_window_stall > 0);
    check("out-of-order merge happened", cnt_ooo_merge > 0);
    check("commits", cnt_commit == NIVL + 1);
    check("empty shard skipped", n_empty > 0);
    check("write-backs", cnt_wb == 2);
    check("GEMM pass", n_gemm == 1);
    check("VPU operation", n_vpu == 1);
    for (int g = 0; g < ND; g++)
      for (int r = 0; r < NRANK; r++) check("DRAM timing", viol[g][r] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
