// cae_nmp_mc: CAE-side memory controller of one channel, extended for GNNear.
//
// One controller drives the command bus of a channel shared by its DIMMs. It
// takes one instruction stream per DIMM (built by the CAE's control core from
// the graph's adjacency and the model) and sends the GNNear instructions over
// the channel. Because every NME instruction has a fixed latency, the
// controller never asks an NME whether it is ready: it keeps, per DIMM, the
// cycle at which each NME resource becomes free and issues an instruction only
// once its resources are free. This is the paper's "determined timing, no
// explicit synchronization" scheme. Per DIMM it tracks:
//   * the load engine, busy for the L-type worst case
//     tRC + tRCD + tCL + ceil(size/64)*tBL (+ a fixed pipeline allowance);
//   * the two source slots of the NME: a C-type may issue once its slot is
//     loaded, an L-type once the slot it overwrites is no longer computed on,
//     so the load of the next shard overlaps the C-types of the current one;
//   * the buffer engine, busy for ceil(size/256)+4 cycles per C-type and
//     ceil(size/64)+6 per R-type;
//   * the channel data bus, reserved for the beats of each R-type.
// Window-based scheduling: an instruction of interval j is held while
// j >= window_base + WINDOW, so a DIMM that finished interval i may run ahead
// into later intervals of the processing window. An end-of-interval entry of a
// stream becomes a marker in that DIMM's result FIFO once all its R-type beats
// have been delivered. R-type beats returning on the channel are tagged with
// DIMM, interval, destination and beat index in issue order and pushed into
// the result FIFO of their DIMM; the controller only issues an R-type if that
// FIFO has room for all of its beats (credits).
// Write-back port (valid/ready): one 64-byte write per request, optionally as
// a broadcast write (a B-type instruction first). A request is taken only when
// the channel has no GNNear work in flight and no stream entry is issuing; it
// is then performed as PRE, ACT, WR, PRE, about 170 cycles, during which the
// streams wait.
//
// Paper versus this design: the instruction scheduling by fixed latencies,
// the window rule, broadcast write and the latency formula follow the paper.
// Round-robin choice between DIMMs, the credit scheme, the allowance
// constants and the closed-page write-back sequence are this design's. The
// paper's controllers also run FR-FCFS with 32-entry queues for ordinary
// traffic; that standard part is not reproduced here.
module cae_nmp_mc
  import gnnear_pkg::*;
#(
  parameter int unsigned DIMMS    = 4,
  parameter int unsigned WINDOW   = 4,
  parameter int unsigned FIFO_CW  = 7,    // width of the result FIFO free count
  parameter int unsigned TAGQ     = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // instruction streams, one per DIMM
  input  logic      [DIMMS-1:0]               s_valid,
  input  mc_entry_t [DIMMS-1:0]               s_entry,
  output logic      [DIMMS-1:0]               s_ready,
  input  logic      [IVL_W-1:0]               win_base,
  // channel
  output ch_ca_t                              ch_ca,
  output logic      [BURST_W-1:0]             ch_wdata,
  input  logic                                ch_rvalid,
  input  logic      [BURST_W-1:0]             ch_rdata,
  // result FIFOs
  output logic      [DIMMS-1:0]               res_push,
  output result_t   [DIMMS-1:0]               res_data,
  input  logic      [DIMMS-1:0][FIFO_CW-1:0]  res_free,
  // write-back requests
  input  logic                                wb_valid,
  output logic                                wb_ready,
  input  logic                                wb_bcast,
  input  logic      [DIMM_W-1:0]              wb_dimm,
  input  logic      [DADDR_W-1:0]             wb_daddr,
  input  logic      [BURST_W-1:0]             wb_data,
  // event counters
  output logic      [31:0]                    cnt_inst,
  output logic      [31:0]                    cnt_window_stall,
  output logic      [31:0]                    cnt_wb
);

  localparam int unsigned L_OVH    = 10;   // pipeline allowance of a load
  localparam int unsigned RD_FIRST = 5;    // issue -> first R-type beat
  localparam int unsigned DW       = (DIMMS > 1) ? $clog2(DIMMS) : 1;

  logic [31:0] now;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  // ---------------------------------------------------------------- model
  logic [DIMMS-1:0][31:0]      load_free, comp_free;
  logic [DIMMS-1:0][1:0][31:0] slot_ready, slot_busy;
  logic [DIMMS-1:0]            nslot, cslot;
  logic [DIMMS-1:0][7:0]       outstanding;
  logic [31:0]                 bus_free;

  // ---------------------------------------------------------------- tags
  typedef struct packed {
    logic [DW-1:0]    dimm;
    logic [IVL_W-1:0] interval;
    logic [DST_W-1:0] dst;
    logic [4:0]       nb;
  } tag_t;
  tag_t                    tq [TAGQ];
  logic [$clog2(TAGQ)-1:0] tq_wp, tq_rp;
  logic [$clog2(TAGQ):0]   tq_cnt;
  logic [4:0]              beat;

  // ---------------------------------------------------------------- issue
  dec_inst_t [DIMMS-1:0] dh;
  logic      [DIMMS-1:0] ok, win_ok;
  logic      [DIMMS-1:0][4:0] nb_r;
  logic      [DIMMS-1:0][31:0] l_lat, c_lat;

  for (genvar d = 0; d < DIMMS; d++) begin : g_dec
    nme_inst_decoder u_dec (.inst(s_entry[d].inst), .my_dimm(DIMM_W'(d)), .dec(dh[d]));
  end

  typedef enum logic [3:0] {WB_IDLE, WB_B, WB_WAIT0, WB_PRE, WB_ACT, WB_WR, WB_PRE2, WB_DONE} wb_e;
  wb_e                wb_st;
  logic [7:0]         wb_wait;
  logic               wb_take;
  logic [DIMM_W-1:0]  wbq_dimm;
  logic [DADDR_W-1:0] wbq_daddr;
  logic [BURST_W-1:0] wbq_data;

  always_comb begin
    for (int d = 0; d < DIMMS; d++) begin
      nb_r[d]  = 5'(ceil_div(32'(dh[d].vsize), BURST_BYTES));
      l_lat[d] = T_RC + T_RCD + T_CL + L_OVH +
                 T_BL * ceil_div(32'(dh[d].vsize > 10'(RANK_SPAN) ? 10'(RANK_SPAN) : dh[d].vsize),
                                 BURST_BYTES);
      c_lat[d] = 32'(ceil_div(32'(dh[d].vsize), ROW_BYTES)) + 4;
      win_ok[d] = (s_entry[d].interval - win_base) < IVL_W'(WINDOW);
      ok[d] = 1'b0;
      if (s_valid[d] && wb_st == WB_IDLE) begin
        if (s_entry[d].eoi) begin
          ok[d] = win_ok[d] && (outstanding[d] == '0) && (res_free[d] != '0);
        end else if (win_ok[d]) begin
          unique case (dh[d].opc)
            OPC_L: ok[d] = (now >= load_free[d]) && (now >= slot_busy[d][nslot[d]]);
            OPC_C: ok[d] = (now >= comp_free[d]) && (now >= slot_ready[d][cslot[d]]);
            OPC_R: ok[d] = (now >= comp_free[d]) && (bus_free <= now + RD_FIRST) &&
                           (tq_cnt < ($clog2(TAGQ)+1)'(TAGQ)) &&
                           (32'(res_free[d]) >= 32'(outstanding[d]) + 32'(nb_r[d]) + 1);
            default: ok[d] = 1'b1;   // B-type does not belong in a stream
          endcase
        end
      end
    end
  end

  // round-robin pick
  logic [DW-1:0] rr, pick;
  logic          any;
  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int i = 0; i < DIMMS; i++) begin
      int unsigned d;
      d = (int'(rr) + i) % DIMMS;
      if (!any && ok[d]) begin
        any  = 1'b1;
        pick = DW'(d);
      end
    end
  end

  always_comb begin
    s_ready = '0;
    if (any) s_ready[pick] = 1'b1;
  end

  // result path
  logic beat_push;
  tag_t th;
  assign th        = tq[tq_rp];
  assign beat_push = ch_rvalid && (tq_cnt != '0);

  always_comb begin
    res_push = '0;
    res_data = '0;
    if (beat_push) begin
      res_push[th.dimm]          = 1'b1;
      res_data[th.dimm].eoi      = 1'b0;
      res_data[th.dimm].interval = th.interval;
      res_data[th.dimm].dst      = th.dst;
      res_data[th.dimm].beat     = beat[3:0];
      res_data[th.dimm].data     = ch_rdata;
    end
    if (any && s_entry[pick].eoi) begin
      res_push[pick]          = 1'b1;
      res_data[pick]          = '0;
      res_data[pick].eoi      = 1'b1;
      res_data[pick].interval = s_entry[pick].interval;
    end
  end

  logic all_idle;
  always_comb begin
    all_idle = (tq_cnt == '0);
    for (int d = 0; d < DIMMS; d++)
      if (now < load_free[d] || now < comp_free[d]) all_idle = 1'b0;
  end

  // a write-back request is taken when the channel has no NMP work left
  assign wb_ready = (wb_st == WB_IDLE) && all_idle && !any;
  assign wb_take  = wb_valid && wb_ready;

  dram_loc_t wb_loc;
  assign wb_loc = daddr_to_loc(wbq_daddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_free <= '0; comp_free <= '0; slot_ready <= '0; slot_busy <= '0;
      nslot <= '0; cslot <= '0; outstanding <= '0; bus_free <= '0;
      tq_wp <= '0; tq_rp <= '0; tq_cnt <= '0; beat <= '0;
      rr <= '0;
      ch_ca <= '0; ch_wdata <= '0;
      wb_st <= WB_IDLE; wb_wait <= '0;
      wbq_dimm <= '0; wbq_daddr <= '0; wbq_data <= '0;
      cnt_inst <= '0; cnt_window_stall <= '0; cnt_wb <= '0;
    end else begin
      ch_ca    <= '0;
      if (wb_wait != '0) wb_wait <= wb_wait - 1'b1;

      for (int d = 0; d < DIMMS; d++)
        if (s_valid[d] && !win_ok[d] && wb_st == WB_IDLE)
          cnt_window_stall <= cnt_window_stall + 1'b1;

      // ---- instruction issue
      if (any) begin
        rr <= (pick == DW'(DIMMS-1)) ? '0 : pick + 1'b1;
        if (!s_entry[pick].eoi) begin
          ch_ca.cmd  <= CMD_NMP;
          ch_ca.inst <= s_entry[pick].inst;
          ch_ca.dimm <= DIMM_W'(pick);
          cnt_inst   <= cnt_inst + 1'b1;
          unique case (dh[pick].opc)
            OPC_L: begin
              load_free[pick] <= now + l_lat[pick];
              slot_ready[pick][nslot[pick]] <= now + l_lat[pick];
              cslot[pick] <= nslot[pick];
              nslot[pick] <= ~nslot[pick];
            end
            OPC_C: begin
              comp_free[pick] <= now + c_lat[pick];
              slot_busy[pick][cslot[pick]] <= now + c_lat[pick];
            end
            OPC_R: begin
              comp_free[pick] <= now + 32'(nb_r[pick]) + 6;
              bus_free <= now + RD_FIRST + 32'(nb_r[pick]);
              tq[tq_wp] <= '{dimm: pick, interval: s_entry[pick].interval,
                             dst: dh[pick].dst, nb: nb_r[pick]};
              tq_wp <= tq_wp + 1'b1;
            end
            default: ;
          endcase
        end
      end

      // ---- beats back from the channel
      if (beat_push) begin
        if (beat + 1'b1 == th.nb) begin
          beat  <= '0;
          tq_rp <= tq_rp + 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
      tq_cnt <= tq_cnt + ($clog2(TAGQ)+1)'(any && !s_entry[pick].eoi && dh[pick].opc == OPC_R)
                       - ($clog2(TAGQ)+1)'(beat_push && beat + 1'b1 == th.nb);
      for (int d = 0; d < DIMMS; d++) begin
        outstanding[d] <= outstanding[d]
          + ((any && pick == DW'(d) && !s_entry[d].eoi && dh[d].opc == OPC_R) ? 8'(nb_r[d]) : 8'd0)
          - ((beat_push && th.dimm == DW'(d)) ? 8'd1 : 8'd0);
      end

      // ---- write-back sequencer
      unique case (wb_st)
        WB_IDLE: if (wb_take) begin
          cnt_wb    <= cnt_wb + 1'b1;
          wbq_dimm  <= wb_dimm;
          wbq_daddr <= wb_daddr;
          wbq_data  <= wb_data;
          if (wb_bcast) begin
            ch_ca.cmd  <= CMD_NMP;
            ch_ca.inst <= mk_b(10'(BURST_BYTES));
            wb_st      <= WB_B;
            wb_wait    <= 8'd4;
          end else begin
            wb_st   <= WB_WAIT0;
            wb_wait <= 8'(T_RAS);
          end
        end
        WB_B: if (wb_wait == '0) begin
          wb_st   <= WB_WAIT0;
          wb_wait <= 8'(T_RAS);
        end
        WB_WAIT0: if (wb_wait == '0) wb_st <= WB_PRE;
        WB_PRE: begin
          ch_ca.cmd  <= CMD_PRE;
          ch_ca.dimm <= wbq_dimm;
          ch_ca.rank <= wb_loc.rank;
          ch_ca.bank <= wb_loc.bank;
          wb_wait    <= 8'(T_RP);
          wb_st      <= WB_ACT;
        end
        WB_ACT: if (wb_wait == '0) begin
          ch_ca.cmd  <= CMD_ACT;
          ch_ca.dimm <= wbq_dimm;
          ch_ca.rank <= wb_loc.rank;
          ch_ca.bank <= wb_loc.bank;
          ch_ca.row  <= wb_loc.row;
          wb_wait    <= 8'(T_RCD);
          wb_st      <= WB_WR;
        end
        WB_WR: if (wb_wait == '0) begin
          ch_ca.cmd  <= CMD_WR;
          ch_ca.dimm <= wbq_dimm;
          ch_ca.rank <= wb_loc.rank;
          ch_ca.bank <= wb_loc.bank;
          ch_ca.col  <= wb_loc.col;
          ch_wdata   <= wbq_data;
          wb_wait    <= 8'(T_CWL + T_BL + T_WR);
          wb_st      <= WB_PRE2;
        end
        WB_PRE2: if (wb_wait == '0) begin
          ch_ca.cmd  <= CMD_PRE;
          ch_ca.dimm <= wbq_dimm;
          ch_ca.rank <= wb_loc.rank;
          ch_ca.bank <= wb_loc.bank;
          wb_wait    <= 8'(T_RP);
          wb_st      <= WB_DONE;
        end
        WB_DONE: if (wb_wait == '0) wb_st <= WB_IDLE;
        default: wb_st <= WB_IDLE;
      endcase
    end
  end

  a_stream_dimm: assert property (@(posedge clk) disable iff (!rst_n)
      any && !s_entry[pick].eoi && dh[pick].opc != OPC_B |-> dh[pick].for_me)
    else $error("stream entry addressed to another DIMM");
  a_beat_tagged: assert property (@(posedge clk) disable iff (!rst_n)
      ch_rvalid |-> tq_cnt != '0)
    else $error("channel data without an outstanding R-type");

endmodule
