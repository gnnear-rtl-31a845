// cae_window_buffer: window buffer of the CAE that merges partial results.
//
// Every DIMM aggregates, for one interval (a group of destination nodes),
// only the edges whose source vectors it stores. The partial sums come back
// through one result FIFO per DIMM and are added here, per destination node,
// into the window buffer. The buffer holds WINDOW intervals at once: results
// of interval j go to region j mod WINDOW, so a DIMM that has already finished
// interval i can deliver results of i+1 .. i+WINDOW-1 while slower DIMMs are
// still on i (window-based scheduling). An interval is complete when every
// DIMM has sent its end-of-interval marker for it; the oldest interval of the
// window (win_base) is then streamed out in order, its region cleared and
// win_base advanced, so results leave in interval order.
//
// Merge: the FIFOs are served round-robin, one 64-byte beat (32 BF16 lanes)
// per two cycles: read the accumulator word, then add and write it back. A
// valid bit per word stands for "zero" after reset and after each commit, so
// no clearing sweep is needed.
// Commit: the words of region win_base mod WINDOW are read in (dst, beat)
// order; words no DIMM wrote are skipped; each written word is offered on
// c_valid/c_ready with its interval, destination and beat.
//
// Paper versus this design: the per-DIMM result FIFOs, the window buffer, the
// in-order commit and the window of intervals follow the paper; the round-
// robin service, the two-cycle merge and the valid-bit clearing are this
// design's choices. Accumulation is in BF16 with truncation.
module cae_window_buffer
  import gnnear_pkg::*;
#(
  parameter int unsigned NUM_DIMM = 16,
  parameter int unsigned WINDOW   = 4,
  parameter int unsigned SHARD    = 128,   // destination nodes per interval
  parameter int unsigned BEATS    = 8      // 64-byte beats per vector (512 B)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // result FIFOs (first-word fall-through)
  input  logic    [NUM_DIMM-1:0]        f_valid,
  input  result_t [NUM_DIMM-1:0]        f_data,
  output logic    [NUM_DIMM-1:0]        f_pop,
  // in-order commit stream
  output logic                          c_valid,
  input  logic                          c_ready,
  output logic    [IVL_W-1:0]           c_interval,
  output logic    [DST_W-1:0]           c_dst,
  output logic    [3:0]                 c_beat,
  output logic    [BURST_W-1:0]         c_data,
  output logic    [IVL_W-1:0]           win_base,
  // event counters
  output logic    [31:0]                cnt_merge,
  output logic    [31:0]                cnt_ooo_merge,    // merged into interval > win_base
  output logic    [31:0]                cnt_commit        // intervals committed
);

  localparam int unsigned WW    = (WINDOW > 1) ? $clog2(WINDOW) : 1;
  localparam int unsigned SW    = $clog2(SHARD);
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int unsigned WORDS = WINDOW * SHARD * BEATS;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned KW    = $clog2(SHARD * BEATS);
  localparam int unsigned DW    = (NUM_DIMM > 1) ? $clog2(NUM_DIMM) : 1;
  localparam int unsigned LANES = BURST_W / BF16_W;

  logic [BURST_W-1:0] mem [WORDS];
  logic [WORDS-1:0]   vbit;
  logic [WINDOW-1:0][NUM_DIMM-1:0] done;

  typedef enum logic [2:0] {S_IDLE, S_MRD, S_MWR, S_CRD, S_COUT} st_e;
  st_e st;

  logic [AW-1:0]      m_addr;
  logic [DW-1:0]      m_src;
  logic [BURST_W-1:0] rdata;
  logic               rvalid_bit;
  logic [KW-1:0]      k;
  logic [WW-1:0]      base_slot;

  assign base_slot = WW'(win_base % IVL_W'(WINDOW));

  function automatic logic [AW-1:0] waddr(input logic [IVL_W-1:0] ivl,
                                         input logic [DST_W-1:0] dst,
                                         input logic [3:0] beat);
    logic [WW-1:0] s;
    s = WW'(ivl % IVL_W'(WINDOW));
    return AW'((32'(s) * SHARD + 32'(dst[SW-1:0])) * BEATS + 32'(beat[BW-1:0]));
  endfunction

  // round-robin choice of a FIFO with data
  logic [DW-1:0] rr, pick;
  logic          any;
  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int i = 0; i < NUM_DIMM; i++) begin
      int unsigned d;
      d = (int'(rr) + i) % NUM_DIMM;
      if (!any && f_valid[d]) begin
        any  = 1'b1;
        pick = DW'(d);
      end
    end
  end

  logic commit_ready;
  assign commit_ready = &done[base_slot];

  // lane-wise BF16 add of the accumulator and the incoming beat
  logic [BURST_W-1:0] sum;
  result_t            cur;
  assign cur = f_data[m_src];
  always_comb begin
    for (int l = 0; l < LANES; l++)
      sum[l*16 +: 16] = bf16_add(rvalid_bit ? rdata[l*16 +: 16] : BF16_ZERO,
                                 cur.data[l*16 +: 16]);
  end

  logic [AW-1:0] c_addr;
  assign c_addr = AW'(32'(base_slot) * SHARD * BEATS + 32'(k));

  always_comb begin
    f_pop = '0;
    if (st == S_IDLE && !commit_ready && any && f_data[pick].eoi) f_pop[pick] = 1'b1;
    if (st == S_MWR) f_pop[m_src] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (st == S_MRD || st == S_CRD) rdata <= mem[(st == S_MRD) ? m_addr : c_addr];
    if (st == S_MWR) mem[m_addr] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      vbit <= '0; done <= '0;
      m_addr <= '0; m_src <= '0; rvalid_bit <= 1'b0; k <= '0; rr <= '0;
      win_base <= '0;
      c_valid <= 1'b0; c_interval <= '0; c_dst <= '0; c_beat <= '0; c_data <= '0;
      cnt_merge <= '0; cnt_ooo_merge <= '0; cnt_commit <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (commit_ready) begin
            k  <= '0;
            st <= S_CRD;
          end else if (any) begin
            rr <= (pick == DW'(NUM_DIMM-1)) ? '0 : pick + 1'b1;
            if (f_data[pick].eoi) begin
              done[WW'(f_data[pick].interval % IVL_W'(WINDOW))][pick] <= 1'b1;
            end else begin
              m_src  <= pick;
              m_addr <= waddr(f_data[pick].interval, f_data[pick].dst, f_data[pick].beat);
              st     <= S_MRD;
            end
          end
        end
        S_MRD: begin
          rvalid_bit <= vbit[m_addr];
          st <= S_MWR;
        end
        S_MWR: begin
          vbit[m_addr] <= 1'b1;
          cnt_merge    <= cnt_merge + 1'b1;
          if (cur.interval != win_base) cnt_ooo_merge <= cnt_ooo_merge + 1'b1;
          st <= S_IDLE;
        end
        S_CRD: begin
          // read issued this cycle; the word is offered next cycle
          rvalid_bit <= vbit[c_addr];
          st <= S_COUT;
        end
        S_COUT: begin
          if (!c_valid && rvalid_bit) begin
            c_valid    <= 1'b1;
            c_interval <= win_base;
            c_dst      <= DST_W'(k / KW'(BEATS));
            c_beat     <= 4'(k % KW'(BEATS));
            c_data     <= rdata;
          end else if (!rvalid_bit || (c_valid && c_ready)) begin
            c_valid      <= 1'b0;
            vbit[c_addr] <= 1'b0;
            if (32'(k) == SHARD * BEATS - 1) begin
              done[base_slot] <= '0;
              win_base        <= win_base + 1'b1;
              cnt_commit      <= cnt_commit + 1'b1;
              st              <= S_IDLE;
            end else begin
              k  <= k + 1'b1;
              st <= S_CRD;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_in_window: assert property (@(posedge clk) disable iff (!rst_n)
      st == S_IDLE && !commit_ready && any |->
        (f_data[pick].interval - win_base) < IVL_W'(WINDOW))
    else $error("result outside the processing window");

endmodule
