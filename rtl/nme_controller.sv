// nme_controller: the light-weight controller of a Near-Memory Engine (NME).
//
// The controller executes the GNNear instructions waiting in the instruction
// register, in order, one dispatch per cycle at most:
//  * L-type: loads one source vector X_u from the DIMM's DRAM into one of two
//    source slots. The Daddr is split with the data-mapping of the paper
//    (bits [7:0] column byte, [8] rank, [11:9] row, [13:12] column, [17:14]
//    bank, [39:24] row): bytes 0-255 of a vector sit in rank 0 and bytes
//    256-511 in rank 1, so both ranks are read in parallel. For each rank a
//    small sequencer issues PRE/ACT as needed (open-page policy, row state
//    tracked per bank) and then one RD per 64-byte burst, spaced tBL apart.
//    With a row hit the load takes tCL + ceil(size/64)*tBL as in the paper.
//  * C-type: for each 256-byte pass of the vector, reads the destination's
//    partial sum from the data buffer, sends it with the source slice and the
//    edge weight through the execution unit and writes the result back. The
//    slot of a destination is Dst_Index*4 rows. Takes ceil(size/256)+3 cycles
//    from dispatch to the next dispatch.
//  * R-type: streams the partial sum of a destination out on the channel in
//    64-byte beats and clears it in the same pass, leaving the slot ready for
//    the next interval.
//  * B-type: the DDR write commands that follow (Vector_Size bytes of them,
//    up to the next precharge) are taken as broadcast writes: the DIMM field
//    of the command is ignored so every DIMM of the channel stores the data.
// Standard DDR commands addressed to this DIMM are passed straight to the rank
// (bypass). Load/compute overlap (inter-shard overlapping): an L-type may
// start while C-types of the previous shard are still computing, because the
// two source slots are used alternately; a C-type waits until the most recent
// load has fully arrived.
//
// Paper versus this design: the instruction set, the mapping, the latency
// formula, broadcast write and overlapping follow the paper. The double
// source slot, the clear-on-readout of R-type, the per-rank sequencer, the
// read-tag queue and all cycle counts beyond the DRAM timings are this
// design's choices. tRRD/tFAW are not modelled (a load touches one bank).
// Vectors longer than 512 bytes need a mapping with more Data bits; with the
// default mapping an L-type loads at most 512 bytes.
//
// Timing: single clock. After reset the controller clears the data buffer
// (one row per cycle, `init_done` rises at the end) before dispatching.
module nme_controller
  import gnnear_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = BUF_ROWS,
  parameter int unsigned ROWB      = ROW_BYTES,
  parameter int unsigned TAGQ      = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [DIMM_W-1:0]            my_dimm,
  // instruction register head
  input  logic                         inst_valid,
  input  dec_inst_t                    inst,
  output logic                         inst_pop,
  // channel side
  input  ch_ca_t                       ch_ca,
  input  logic [BURST_W-1:0]           ch_wdata,
  output logic                         ch_rvalid,
  output logic [BURST_W-1:0]           ch_rdata,
  // rank side (through the arbiters)
  output rank_ca_t [NRANK-1:0]         host_ca,
  output rank_ca_t [NRANK-1:0]         nme_ca,
  input  logic     [NRANK-1:0]         nme_gnt,
  output logic     [BURST_W-1:0]       dram_wdata,
  input  logic     [NRANK-1:0]         dram_rvalid,
  input  logic     [NRANK-1:0][BURST_W-1:0] dram_rdata,
  // data buffer
  output logic                         buf_rd_en,
  output logic [$clog2(BUF_DEPTH)-1:0] buf_rd_addr,
  input  logic [ROWB*8-1:0]            buf_rd_data,
  output logic                         buf_wr_en,
  output logic [$clog2(BUF_DEPTH)-1:0] buf_wr_addr,
  output logic [ROWB*8-1:0]            buf_wr_data,
  // execution unit
  output logic                         eu_valid,
  output red_op_e                      eu_op,
  output bf16_t                        eu_edge_w,
  output logic [ROWB*8-1:0]            eu_x,
  output logic [ROWB*8-1:0]            eu_psum,
  input  logic                         eu_out_valid,
  input  logic [ROWB*8-1:0]            eu_y,
  // status and event counters
  output logic                         init_done,
  output logic                         busy,
  output logic [31:0]                  cnt_overlap,
  output logic [31:0]                  cnt_row_hit,
  output logic [31:0]                  cnt_row_miss,
  output logic [31:0]                  cnt_bcast_wr,
  output logic [31:0]                  cnt_bypass,
  output logic [31:0]                  cnt_dropped
);

  localparam int unsigned AW        = $clog2(BUF_DEPTH);
  localparam int unsigned WPR       = ROWB / BURST_BYTES;     // 64 B words per row
  localparam int unsigned SLOT_R    = BUF_DEPTH >> DST_W;     // rows per Dst slot
  localparam int unsigned SRCW      = SLOT_R * WPR;           // words per source slot
  localparam int unsigned ELEMS     = ROWB / 2;               // BF16 per row
  localparam int unsigned SRCIW     = $clog2(2*SRCW);

  // ------------------------------------------------------------ time base
  logic [31:0] now;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  // ------------------------------------------------------------ init clear
  logic [AW:0] init_cnt;
  assign init_done = init_cnt[AW];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          init_cnt <= '0;
    else if (!init_done) init_cnt <= init_cnt + 1'b1;
  end

  // ------------------------------------------------------------ bank state
  logic [NRANK-1:0][NBANK-1:0]             open_v;
  logic [NRANK-1:0][NBANK-1:0][ROW_W-1:0]  open_row;
  logic [NRANK-1:0][NBANK-1:0][31:0]       act_t, pre_t;

  // ------------------------------------------------------------ host bypass
  logic        bcast_active, bcast_wait_pre;
  logic [10:0] bcast_left;
  logic        host_hit;
  assign host_hit = (ch_ca.cmd inside {CMD_ACT, CMD_RD, CMD_WR, CMD_PRE}) &&
                    ((ch_ca.dimm == my_dimm) || bcast_active);

  always_comb begin
    for (int r = 0; r < NRANK; r++) begin
      host_ca[r] = '0;
      if (host_hit && ch_ca.rank == 1'(r)) begin
        host_ca[r].cmd  = ch_ca.cmd;
        host_ca[r].bank = ch_ca.bank;
        host_ca[r].row  = ch_ca.row;
        host_ca[r].col  = ch_ca.col;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (host_hit && ch_ca.cmd == CMD_WR) dram_wdata <= ch_wdata;
  end

  // ------------------------------------------------------------ load engine
  typedef enum logic [2:0] {LS_IDLE, LS_DECIDE, LS_PRE, LS_ACT, LS_RD} ls_e;
  ls_e  [NRANK-1:0]              ls;
  logic [NRANK-1:0][BANK_W-1:0]  ls_bank;
  logic [NRANK-1:0][ROW_W-1:0]   ls_row;
  logic [NRANK-1:0][COL_W-1:0]   ls_col;
  logic [NRANK-1:0][3:0]         ls_nb;      // bursts to issue
  logic [NRANK-1:0][3:0]         ls_k;       // bursts issued
  logic [NRANK-1:0][3:0]         ls_ret;     // bursts still to return
  logic [NRANK-1:0][5:0]         ls_wait;
  logic                          load_active;
  logic                          load_slot;  // slot being loaded
  logic                          next_slot;  // slot of the next L
  logic                          last_l_slot;
  logic [1:0]                    slot_valid;

  // read tags: which rvalid belongs to a host read and which to a load
  typedef struct packed {
    logic            host;
    logic [SRCIW-1:0] word;
  } rtag_t;
  rtag_t [NRANK-1:0][TAGQ-1:0]      tq;
  logic  [NRANK-1:0][$clog2(TAGQ)-1:0] tq_wp, tq_rp;

  // source slots
  logic [BURST_W-1:0] src_mem [2*SRCW];

  // ------------------------------------------------------------ buffer engine
  typedef enum logic [1:0] {BE_IDLE, BE_C, BE_R} be_e;
  be_e         be;
  logic [2:0]  be_rows;        // C: passes, R: rows
  logic [2:0]  be_k;           // C: next pass to read
  logic [4:0]  be_beats, be_j; // R: beats total / next beat
  logic [DST_W-1:0] be_dst;
  logic [VSIZE_W-1:0] be_vsize;
  red_op_e     be_op;
  bf16_t       be_w;
  logic        be_slot;
  logic        p1_v, p2_v;
  logic [2:0]  p1_k, p2_k;
  logic        r_prime;

  // ------------------------------------------------------------ dispatch
  logic can_l, can_c, can_r, drop, take_b;
  always_comb begin
    can_l  = !load_active && !((be == BE_C) && (be_slot == next_slot));
    can_c  = (be == BE_IDLE) && slot_valid[last_l_slot];
    can_r  = (be == BE_IDLE);
    drop   = !inst.for_me || inst.illegal;
    take_b = 1'b0;
    inst_pop = 1'b0;
    if (inst_valid && init_done) begin
      if (drop) inst_pop = 1'b1;
      else unique case (inst.opc)
        OPC_L: inst_pop = can_l;
        OPC_C: inst_pop = can_c;
        OPC_R: inst_pop = can_r;
        OPC_B: begin inst_pop = 1'b1; take_b = 1'b1; end
      endcase
    end
  end

  logic start_l, start_c, start_r;
  assign start_l = inst_pop && !drop && inst.opc == OPC_L;
  assign start_c = inst_pop && !drop && inst.opc == OPC_C;
  assign start_r = inst_pop && !drop && inst.opc == OPC_R;

  dram_loc_t  l_loc;
  logic [9:0] l_bytes0, l_bytes1;
  assign l_loc    = daddr_to_loc(inst.daddr);
  assign l_bytes0 = (inst.vsize > 10'(RANK_SPAN)) ? 10'(RANK_SPAN) : inst.vsize;
  assign l_bytes1 = (inst.vsize > 10'(RANK_SPAN)) ?
                    ((inst.vsize > 10'(2*RANK_SPAN)) ? 10'(RANK_SPAN) : inst.vsize - 10'(RANK_SPAN)) : 10'd0;

  // per-rank command requests
  always_comb begin
    for (int r = 0; r < NRANK; r++) begin
      nme_ca[r] = '0;
      nme_ca[r].bank = ls_bank[r];
      nme_ca[r].row  = ls_row[r];
      nme_ca[r].col  = ls_col[r] + 4'(ls_k[r]);
      unique case (ls[r])
        LS_PRE: if (now - act_t[r][ls_bank[r]] >= T_RAS) nme_ca[r].cmd = CMD_PRE;
        LS_ACT: if (now - pre_t[r][ls_bank[r]] >= T_RP &&
                    now - act_t[r][ls_bank[r]] >= T_RC) nme_ca[r].cmd = CMD_ACT;
        LS_RD:  if (ls_wait[r] == '0) nme_ca[r].cmd = CMD_RD;
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------ sequential
  logic load_finish;
  always_comb begin
    load_finish = load_active;
    for (int r = 0; r < NRANK; r++)
      if (ls[r] != LS_IDLE || ls_ret[r] != '0) load_finish = 1'b0;
  end

  // row-buffer outcome of each rank access of a load (both ranks may decide
  // in the same cycle)
  logic [1:0] n_hit, n_miss;
  always_comb begin
    n_hit  = '0;
    n_miss = '0;
    for (int r = 0; r < NRANK; r++)
      if (ls[r] == LS_DECIDE) begin
        if (open_v[r][ls_bank[r]] && open_row[r][ls_bank[r]] == ls_row[r]) n_hit  = n_hit + 1'b1;
        else                                                                n_miss = n_miss + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_row_hit  <= '0;
      cnt_row_miss <= '0;
    end else begin
      cnt_row_hit  <= cnt_row_hit + 32'(n_hit);
      cnt_row_miss <= cnt_row_miss + 32'(n_miss);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_v <= '0; open_row <= '0; act_t <= '0; pre_t <= '0;
      for (int r = 0; r < NRANK; r++) ls[r] <= LS_IDLE;
      ls_bank <= '0; ls_row <= '0; ls_col <= '0; ls_nb <= '0; ls_k <= '0;
      ls_ret <= '0; ls_wait <= '0;
      load_active <= 1'b0; load_slot <= 1'b0; next_slot <= 1'b0;
      last_l_slot <= 1'b0; slot_valid <= '0;
      tq_wp <= '0; tq_rp <= '0;
      bcast_active <= 1'b0; bcast_wait_pre <= 1'b0; bcast_left <= '0;
      cnt_overlap <= '0;
      cnt_bcast_wr <= '0; cnt_bypass <= '0; cnt_dropped <= '0;
    end else begin
      // -------- broadcast-write window
      if (take_b) begin
        bcast_active   <= 1'b1;
        bcast_wait_pre <= 1'b0;
        bcast_left     <= {1'b0, inst.vsize};
      end else if (bcast_active) begin
        if (ch_ca.cmd == CMD_WR) begin
          cnt_bcast_wr <= cnt_bcast_wr + 1'b1;
          if (bcast_left <= 11'(BURST_BYTES)) begin
            bcast_left     <= '0;
            bcast_wait_pre <= 1'b1;
          end else begin
            bcast_left <= bcast_left - 11'(BURST_BYTES);
          end
        end else if (ch_ca.cmd == CMD_PRE && bcast_wait_pre) begin
          bcast_active   <= 1'b0;
          bcast_wait_pre <= 1'b0;
        end
      end
      if (host_hit) cnt_bypass <= cnt_bypass + 1'b1;
      if (inst_pop && drop) cnt_dropped <= cnt_dropped + 1'b1;

      // -------- bank state from host commands
      if (host_hit) begin
        if (ch_ca.cmd == CMD_ACT) begin
          open_v[ch_ca.rank][ch_ca.bank]   <= 1'b1;
          open_row[ch_ca.rank][ch_ca.bank] <= ch_ca.row;
          act_t[ch_ca.rank][ch_ca.bank]    <= now;
        end else if (ch_ca.cmd == CMD_PRE) begin
          open_v[ch_ca.rank][ch_ca.bank]   <= 1'b0;
          pre_t[ch_ca.rank][ch_ca.bank]    <= now;
        end
      end

      // -------- load start
      if (start_l) begin
        load_active <= 1'b1;
        load_slot   <= next_slot;
        last_l_slot <= next_slot;
        next_slot   <= ~next_slot;
        slot_valid[next_slot] <= 1'b0;
        if (be == BE_C) cnt_overlap <= cnt_overlap + 1'b1;
      end
      if (load_finish) begin
        load_active <= 1'b0;
        slot_valid[load_slot] <= 1'b1;
      end

      for (int r = 0; r < NRANK; r++) begin
        if (ls_wait[r] != '0) ls_wait[r] <= ls_wait[r] - 1'b1;
        unique case (ls[r])
          LS_IDLE: if (start_l) begin
            ls_bank[r] <= l_loc.bank;
            ls_row[r]  <= l_loc.row;
            ls_col[r]  <= l_loc.col;
            ls_k[r]    <= '0;
            ls_nb[r]   <= 4'(ceil_div(32'((r == 0) ? l_bytes0 : l_bytes1), BURST_BYTES));
            ls_ret[r]  <= 4'(ceil_div(32'((r == 0) ? l_bytes0 : l_bytes1), BURST_BYTES));
            if (((r == 0) ? l_bytes0 : l_bytes1) != '0) ls[r] <= LS_DECIDE;
          end
          LS_DECIDE: begin
            if (open_v[r][ls_bank[r]] && open_row[r][ls_bank[r]] == ls_row[r]) begin
              ls[r] <= LS_RD;
            end else begin
              ls[r] <= open_v[r][ls_bank[r]] ? LS_PRE : LS_ACT;
            end
          end
          LS_PRE: if (nme_gnt[r]) begin
            open_v[r][ls_bank[r]] <= 1'b0;
            pre_t[r][ls_bank[r]]  <= now;
            ls[r] <= LS_ACT;
          end
          LS_ACT: if (nme_gnt[r]) begin
            open_v[r][ls_bank[r]]   <= 1'b1;
            open_row[r][ls_bank[r]] <= ls_row[r];
            act_t[r][ls_bank[r]]    <= now;
            ls_wait[r] <= 6'(T_RCD - 1);
            ls[r] <= LS_RD;
          end
          LS_RD: if (nme_gnt[r]) begin
            ls_k[r]    <= ls_k[r] + 1'b1;
            ls_wait[r] <= 6'(T_BL - 1);
            if (ls_k[r] + 1'b1 == ls_nb[r]) ls[r] <= LS_IDLE;
          end
          default: ls[r] <= LS_IDLE;
        endcase

        // read tags: push on every RD reaching this rank
        if ((host_ca[r].cmd == CMD_RD) ||
            (ls[r] == LS_RD && nme_gnt[r])) begin
          tq[r][tq_wp[r]].host <= (host_ca[r].cmd == CMD_RD);
          tq[r][tq_wp[r]].word <= SRCIW'({load_slot, 4'(r*(RANK_SPAN/BURST_BYTES)) + ls_k[r]});
          tq_wp[r] <= tq_wp[r] + 1'b1;
        end
        if (dram_rvalid[r]) begin
          tq_rp[r] <= tq_rp[r] + 1'b1;
          if (!tq[r][tq_rp[r]].host) ls_ret[r] <= ls_ret[r] - 1'b1;
        end
      end
    end
  end

  // source slot writes (no reset: data storage)
  always_ff @(posedge clk) begin
    for (int r = 0; r < NRANK; r++) begin
      if (dram_rvalid[r] && !tq[r][tq_rp[r]].host)
        src_mem[tq[r][tq_rp[r]].word] <= dram_rdata[r];
    end
  end

  // ------------------------------------------------------------ buffer engine
  logic [ROWB*8-1:0] x_row;
  always_comb begin
    for (int w = 0; w < WPR; w++)
      x_row[w*BURST_W +: BURST_W] = src_mem[SRCIW'({be_slot, 4'(p1_k*WPR + w)})];
    // zero the elements past the end of the vector
    for (int e = 0; e < ELEMS; e++)
      if ((32'(p1_k) * ELEMS + 32'(e)) * 2 >= 32'(be_vsize)) x_row[e*16 +: 16] = 16'h0;
  end

  assign eu_valid  = p1_v;
  assign eu_op     = be_op;
  assign eu_edge_w = be_w;
  assign eu_x      = x_row;
  assign eu_psum   = buf_rd_data;

  logic [AW-1:0] slot_base;
  assign slot_base = AW'(be_dst) * AW'(SLOT_R);

  always_comb begin
    buf_rd_en   = 1'b0;
    buf_rd_addr = '0;
    buf_wr_en   = 1'b0;
    buf_wr_addr = '0;
    buf_wr_data = '0;
    if (!init_done) begin
      buf_wr_en   = 1'b1;
      buf_wr_addr = init_cnt[AW-1:0];
    end else if (be == BE_C) begin
      if (be_k < be_rows) begin
        buf_rd_en   = 1'b1;
        buf_rd_addr = slot_base + AW'(be_k);
      end
      if (eu_out_valid) begin
        buf_wr_en   = 1'b1;
        buf_wr_addr = slot_base + AW'(p2_k);
        buf_wr_data = eu_y;
      end
    end else if (be == BE_R) begin
      // read a row (and clear it) one cycle before its first beat is needed
      if (r_prime || (be_j[1:0] == 2'(WPR-1) && be_j + 1'b1 < be_beats)) begin
        buf_rd_en   = 1'b1;
        buf_rd_addr = slot_base + AW'(r_prime ? 5'd0 : 5'((be_j + 5'd1) / 5'(WPR)));
        buf_wr_en   = 1'b1;
        buf_wr_addr = buf_rd_addr;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      be <= BE_IDLE;
      be_rows <= '0; be_k <= '0; be_beats <= '0; be_j <= '0;
      be_dst <= '0; be_vsize <= '0; be_op <= RED_WSUM; be_w <= '0; be_slot <= 1'b0;
      p1_v <= 1'b0; p2_v <= 1'b0; p1_k <= '0; p2_k <= '0;
      r_prime <= 1'b0;
      ch_rvalid <= 1'b0; ch_rdata <= '0;
    end else begin
      ch_rvalid <= 1'b0;
      p1_v <= 1'b0;
      p2_v <= p1_v;
      p2_k <= p1_k;
      unique case (be)
        BE_IDLE: begin
          if (start_c) begin
            be       <= BE_C;
            be_rows  <= 3'(ceil_div(inst.vsize, ROWB));
            be_k     <= '0;
            be_dst   <= inst.dst;
            be_vsize <= inst.vsize;
            be_op    <= inst.op;
            be_w     <= inst.edge_w;
            be_slot  <= last_l_slot;
          end else if (start_r) begin
            be       <= BE_R;
            be_beats <= 5'(ceil_div(inst.vsize, BURST_BYTES));
            be_j     <= '0;
            be_dst   <= inst.dst;
            r_prime  <= 1'b1;
          end
        end
        BE_C: begin
          if (be_k < be_rows) begin
            be_k <= be_k + 1'b1;
            p1_v <= 1'b1;
            p1_k <= be_k;
          end else if (!p1_v && !p2_v) begin
            be <= BE_IDLE;
          end
        end
        BE_R: begin
          if (r_prime) begin
            r_prime <= 1'b0;
          end else begin
            ch_rvalid <= 1'b1;
            ch_rdata  <= buf_rd_data[be_j[1:0]*BURST_W +: BURST_W];
            be_j      <= be_j + 1'b1;
            if (be_j + 1'b1 == be_beats) be <= BE_IDLE;
          end
        end
        default: be <= BE_IDLE;
      endcase
      // host reads return through the same channel data path
      for (int r = 0; r < NRANK; r++) begin
        if (dram_rvalid[r] && tq[r][tq_rp[r]].host) begin
          ch_rvalid <= 1'b1;
          ch_rdata  <= dram_rdata[r];
        end
      end
    end
  end

  assign busy = load_active || (be != BE_IDLE) || inst_valid;

  logic host_ret;
  always_comb begin
    host_ret = 1'b0;
    for (int r = 0; r < NRANK; r++)
      if (dram_rvalid[r] && tq[r][tq_rp[r]].host) host_ret = 1'b1;
  end

  // The CAE must not return host read data while an R-type streams out.
  a_no_readout_clash: assert property (@(posedge clk) disable iff (!rst_n)
      !((be == BE_R) && !r_prime && host_ret))
    else $error("host read data collides with an R-type readout");

endmodule
