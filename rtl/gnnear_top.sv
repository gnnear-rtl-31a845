// gnnear_top: the GNNear accelerator, a Centralized Acceleration Engine (CAE)
// with NUM_CH memory channels of DIMMS NMP-enabled DIMMs each.
//
// Structure:
//  * Per channel one CAE memory controller (cae_nmp_mc) drives the channel's
//    command/data bus, which all DIMMs of the channel share. It issues the
//    GNNear instructions of each DIMM's stream with fixed-latency timing, and
//    performs (broadcast) write-back of vectors into the DIMMs.
//  * Each DIMM has a Near-Memory Engine (nme) between the channel and its two
//    ranks. Read data of the DIMMs of a channel return on the shared data bus;
//    only the addressed DIMM drives it at a time.
//  * Partial results of every DIMM go into its own result FIFO
//    (cae_result_fifo) and from there into the window buffer
//    (cae_window_buffer), which merges them per destination and commits whole
//    intervals in order to the scratchpad through port A, at word address
//    res_base + (interval*SHARD + dst)*BEATS + beat.
//  * The GEMM engine (cae_gemm), the VPU (cae_vpu) and port B of the
//    scratchpad (cae_scratchpad) serve the Update phase. The CAE's control
//    core and on-chip interconnect, which would produce the instruction
//    streams and move data between scratchpad, GEMM and VPU, are not part of
//    this RTL: their connections are ports of this module. The DRAM devices
//    are outside the chip; their rank command/data buses are ports too.
// Instruction streams are held back until every NME has cleared its data
// buffer after reset (init_done).
//
// Paper versus this design: the organisation (CAE with GEMM, VPU, scratchpad
// and memory controllers; DIMMs with NMEs; per-DIMM result FIFOs and a window
// buffer) and the default sizes follow the paper: 4 channels x 4 DIMMs x 2
// ranks, 128x128 GEMM, 32 SIMD-16 VPU cores, 16 MB scratchpad with 8 banks,
// shard size 128 and window 4. A single clock for all parts, the result
// address formula and the port-level split of the control core are this
// design's choices.
module gnnear_top
  import gnnear_pkg::*;
#(
  parameter int unsigned NUM_CH      = 4,
  parameter int unsigned DIMMS       = 4,
  parameter int unsigned WINDOW      = 4,
  parameter int unsigned SHARD       = 128,
  parameter int unsigned BEATS       = 8,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned GEMM_ROWS   = 128,
  parameter int unsigned GEMM_COLS   = 128,
  parameter int unsigned VPU_CORES   = 32,
  parameter int unsigned VPU_LANES   = 16,
  parameter int unsigned SPM_BYTES   = 16 * 1024 * 1024,
  parameter int unsigned SPM_BANKS   = 8
) (
  input  logic                                              clk,
  input  logic                                              rst_n,
  // ---- instruction streams from the control core, per channel and DIMM
  input  logic      [NUM_CH-1:0][DIMMS-1:0]                 s_valid,
  input  mc_entry_t [NUM_CH-1:0][DIMMS-1:0]                 s_entry,
  output logic      [NUM_CH-1:0][DIMMS-1:0]                 s_ready,
  // ---- write-back requests, per channel
  input  logic      [NUM_CH-1:0]                            wb_valid,
  output logic      [NUM_CH-1:0]                            wb_ready,
  input  logic      [NUM_CH-1:0]                            wb_bcast,
  input  logic      [NUM_CH-1:0][DIMM_W-1:0]                wb_dimm,
  input  logic      [NUM_CH-1:0][DADDR_W-1:0]               wb_daddr,
  input  logic      [NUM_CH-1:0][BURST_W-1:0]               wb_data,
  // ---- DRAM ranks
  output rank_ca_t  [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0]      rank_ca,
  output logic      [NUM_CH-1:0][DIMMS-1:0][BURST_W-1:0]    rank_wdata,
  input  logic      [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0]      rank_rvalid,
  input  logic      [NUM_CH-1:0][DIMMS-1:0][NRANK-1:0][BURST_W-1:0] rank_rdata,
  // ---- merged results
  input  logic      [$clog2(SPM_BYTES/BURST_BYTES)-1:0]     res_base,
  output logic      [IVL_W-1:0]                             win_base,
  // ---- scratchpad port B (interconnect side)
  input  logic                                              spm_b_en,
  input  logic                                              spm_b_we,
  input  logic      [$clog2(SPM_BYTES/BURST_BYTES)-1:0]     spm_b_addr,
  input  logic      [BURST_W-1:0]                           spm_b_wdata,
  output logic      [BURST_W-1:0]                           spm_b_rdata,
  // ---- GEMM engine
  input  logic                                              gemm_w_load,
  input  logic      [$clog2(GEMM_ROWS)-1:0]                 gemm_w_row,
  input  bf16_t     [GEMM_COLS-1:0]                         gemm_w_vec,
  input  logic                                              gemm_a_valid,
  input  bf16_t     [GEMM_ROWS-1:0]                         gemm_a_vec,
  output logic                                              gemm_y_valid,
  output bf16_t     [GEMM_COLS-1:0]                         gemm_y_vec,
  // ---- VPU
  input  logic                                              vpu_in_valid,
  input  vop_e                                              vpu_op,
  input  bf16_t                                             vpu_s,
  input  bf16_t     [VPU_CORES*VPU_LANES-1:0]               vpu_a,
  input  bf16_t     [VPU_CORES*VPU_LANES-1:0]               vpu_b,
  input  bf16_t     [VPU_CORES*VPU_LANES-1:0]               vpu_c,
  output logic                                              vpu_out_valid,
  output bf16_t     [VPU_CORES*VPU_LANES-1:0]               vpu_y,
  // ---- status and event counters
  output logic                                              init_done,
  output logic      [31:0]                                  cnt_overlap,
  output logic      [31:0]                                  cnt_row_hit,
  output logic      [31:0]                                  cnt_row_miss,
  output logic      [31:0]                                  cnt_bcast_wr,
  output logic      [31:0]                                  cnt_bypass,
  output logic      [31:0]                                  cnt_dropped,
  output logic      [31:0]                                  cnt_inst,
  output logic      [31:0]                                  cnt_window_stall,
  output logic      [31:0]                                  cnt_wb,
  output logic      [31:0]                                  cnt_merge,
  output logic      [31:0]                                  cnt_ooo_merge,
  output logic      [31:0]                                  cnt_commit
);

  localparam int unsigned ND  = NUM_CH * DIMMS;
  localparam int unsigned FCW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned SAW = $clog2(SPM_BYTES / BURST_BYTES);

  // ------------------------------------------------------------ channels
  ch_ca_t        [NUM_CH-1:0]                   ch_ca;
  logic          [NUM_CH-1:0][BURST_W-1:0]      ch_wdata;
  logic          [NUM_CH-1:0]                   ch_rvalid;
  logic          [NUM_CH-1:0][BURST_W-1:0]      ch_rdata;
  logic          [NUM_CH-1:0][DIMMS-1:0]        d_rvalid;
  logic          [NUM_CH-1:0][DIMMS-1:0][BURST_W-1:0] d_rdata;
  logic          [NUM_CH-1:0][DIMMS-1:0]        d_init, d_busy, d_full;
  logic          [NUM_CH-1:0][DIMMS-1:0][5:0][31:0] d_cnt;
  logic          [NUM_CH-1:0][2:0][31:0]        m_cnt;

  logic          [ND-1:0]                       f_push, f_pop, f_valid;
  result_t       [ND-1:0]                       f_din, f_dout;
  logic          [ND-1:0][FCW-1:0]              f_free;

  assign init_done = &d_init;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic      [DIMMS-1:0] sv, sr;
    assign sv          = init_done ? s_valid[c] : '0;
    assign s_ready[c]  = sr;

    cae_nmp_mc #(.DIMMS(DIMMS), .WINDOW(WINDOW), .FIFO_CW(FCW)) u_mc (
      .clk, .rst_n,
      .s_valid (sv),
      .s_entry (s_entry[c]),
      .s_ready (sr),
      .win_base(win_base),
      .ch_ca   (ch_ca[c]),
      .ch_wdata(ch_wdata[c]),
      .ch_rvalid(ch_rvalid[c]),
      .ch_rdata(ch_rdata[c]),
      .res_push(f_push[c*DIMMS +: DIMMS]),
      .res_data(f_din[c*DIMMS +: DIMMS]),
      .res_free(f_free[c*DIMMS +: DIMMS]),
      .wb_valid(wb_valid[c]),
      .wb_ready(wb_ready[c]),
      .wb_bcast(wb_bcast[c]),
      .wb_dimm (wb_dimm[c]),
      .wb_daddr(wb_daddr[c]),
      .wb_data (wb_data[c]),
      .cnt_inst        (m_cnt[c][0]),
      .cnt_window_stall(m_cnt[c][1]),
      .cnt_wb          (m_cnt[c][2])
    );

    for (genvar d = 0; d < DIMMS; d++) begin : g_dimm
      nme u_nme (
        .clk, .rst_n,
        .my_dimm    (DIMM_W'(d)),
        .ch_ca      (ch_ca[c]),
        .ch_wdata   (ch_wdata[c]),
        .ch_rvalid  (d_rvalid[c][d]),
        .ch_rdata   (d_rdata[c][d]),
        .rank_ca    (rank_ca[c][d]),
        .rank_wdata (rank_wdata[c][d]),
        .rank_rvalid(rank_rvalid[c][d]),
        .rank_rdata (rank_rdata[c][d]),
        .init_done  (d_init[c][d]),
        .busy       (d_busy[c][d]),
        .ireg_full  (d_full[c][d]),
        .cnt_overlap (d_cnt[c][d][0]),
        .cnt_row_hit (d_cnt[c][d][1]),
        .cnt_row_miss(d_cnt[c][d][2]),
        .cnt_bcast_wr(d_cnt[c][d][3]),
        .cnt_bypass  (d_cnt[c][d][4]),
        .cnt_dropped (d_cnt[c][d][5])
      );

      cae_result_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
        .clk, .rst_n,
        .push (f_push[c*DIMMS + d]),
        .din  (f_din[c*DIMMS + d]),
        .pop  (f_pop[c*DIMMS + d]),
        .dout (f_dout[c*DIMMS + d]),
        .valid(f_valid[c*DIMMS + d]),
        .free (f_free[c*DIMMS + d])
      );
    end

    // shared data bus of the channel: only the addressed DIMM drives it
    always_comb begin
      ch_rvalid[c] = 1'b0;
      ch_rdata[c]  = '0;
      for (int d = 0; d < DIMMS; d++) begin
        ch_rvalid[c] = ch_rvalid[c] | d_rvalid[c][d];
        ch_rdata[c]  = ch_rdata[c]  | (d_rvalid[c][d] ? d_rdata[c][d] : '0);
      end
    end

    a_one_driver: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(d_rvalid[c]))
      else $error("two DIMMs drive the channel data bus");
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) d_full[c] == '0 || ch_ca[c].cmd != CMD_NMP)
      else $error("instruction register full when an instruction arrives");
  end

  // ------------------------------------------------------------ window buffer
  logic               c_valid;
  logic [IVL_W-1:0]   c_interval;
  logic [DST_W-1:0]   c_dst;
  logic [3:0]         c_beat;
  logic [BURST_W-1:0] c_data;

  cae_window_buffer #(.NUM_DIMM(ND), .WINDOW(WINDOW), .SHARD(SHARD), .BEATS(BEATS)) u_win (
    .clk, .rst_n,
    .f_valid      (f_valid),
    .f_data       (f_dout),
    .f_pop        (f_pop),
    .c_valid      (c_valid),
    .c_ready      (1'b1),
    .c_interval   (c_interval),
    .c_dst        (c_dst),
    .c_beat       (c_beat),
    .c_data       (c_data),
    .win_base     (win_base),
    .cnt_merge    (cnt_merge),
    .cnt_ooo_merge(cnt_ooo_merge),
    .cnt_commit   (cnt_commit)
  );

  // ------------------------------------------------------------ scratchpad
  logic [SAW-1:0]     a_addr;
  logic [BURST_W-1:0] a_rdata_unused;
  assign a_addr = res_base + SAW'((32'(c_interval) * SHARD + 32'(c_dst)) * BEATS + 32'(c_beat));

  cae_scratchpad #(.BYTES(SPM_BYTES), .BANKS(SPM_BANKS), .WORD_BYTES(BURST_BYTES)) u_spm (
    .clk,
    .a_en   (c_valid),
    .a_we   (1'b1),
    .a_addr (a_addr),
    .a_wdata(c_data),
    .a_rdata(a_rdata_unused),
    .b_en   (spm_b_en),
    .b_we   (spm_b_we),
    .b_addr (spm_b_addr),
    .b_wdata(spm_b_wdata),
    .b_rdata(spm_b_rdata)
  );

  // ------------------------------------------------------------ GEMM and VPU
  cae_gemm #(.ROWS(GEMM_ROWS), .COLS(GEMM_COLS)) u_gemm (
    .clk, .rst_n,
    .w_load (gemm_w_load),
    .w_row  (gemm_w_row),
    .w_vec  (gemm_w_vec),
    .a_valid(gemm_a_valid),
    .a_vec  (gemm_a_vec),
    .y_valid(gemm_y_valid),
    .y_vec  (gemm_y_vec)
  );

  cae_vpu #(.CORES(VPU_CORES), .LANES(VPU_LANES)) u_vpu (
    .clk, .rst_n,
    .in_valid (vpu_in_valid),
    .op       (vpu_op),
    .s        (vpu_s),
    .a        (vpu_a),
    .b        (vpu_b),
    .c        (vpu_c),
    .out_valid(vpu_out_valid),
    .y        (vpu_y)
  );

  // ------------------------------------------------------------ counters
  always_comb begin
    cnt_overlap = '0; cnt_row_hit = '0; cnt_row_miss = '0;
    cnt_bcast_wr = '0; cnt_bypass = '0; cnt_dropped = '0;
    cnt_inst = '0; cnt_window_stall = '0; cnt_wb = '0;
    for (int c = 0; c < NUM_CH; c++) begin
      cnt_inst         = cnt_inst         + m_cnt[c][0];
      cnt_window_stall = cnt_window_stall + m_cnt[c][1];
      cnt_wb           = cnt_wb           + m_cnt[c][2];
      for (int d = 0; d < DIMMS; d++) begin
        cnt_overlap  = cnt_overlap  + d_cnt[c][d][0];
        cnt_row_hit  = cnt_row_hit  + d_cnt[c][d][1];
        cnt_row_miss = cnt_row_miss + d_cnt[c][d][2];
        cnt_bcast_wr = cnt_bcast_wr + d_cnt[c][d][3];
        cnt_bypass   = cnt_bypass   + d_cnt[c][d][4];
        cnt_dropped  = cnt_dropped  + d_cnt[c][d][5];
      end
    end
  end

endmodule
