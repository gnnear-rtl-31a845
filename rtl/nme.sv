// nme: Near-Memory Engine, the logic added to the buffer chip of an LRDIMM.
//
// The NME watches its channel's command bus. GNNear instructions (carried as
// CMD_NMP commands) go into the instruction register, are decoded, and are
// executed by the controller with the execution unit and the data buffer.
// Standard DDR commands for this DIMM bypass the execution logic and go to the
// addressed rank through a per-rank arbiter. Partial results (R-type) and
// bypassed read data return on the channel data path.
//
// Blocks, as in the NME drawing of the paper: instruction register,
// instruction decoder, controller, execution unit (16 PEs x 8 MACs), 256 KB
// data buffer, and an arbiter in front of each of the two ranks. The DDR PHYs
// and the DQ / C/A re-drive buffer of a standard LRDIMM are not part of this
// RTL: the rank ports below are the digital side of those PHYs, with one
// 64-byte burst per transfer instead of eight DQ beats (this design's
// abstraction). `my_dimm` is the DIMM's position on its channel.
//
// Timing: an instruction seen on `ch_ca` is in the instruction register the
// next cycle and can be dispatched the cycle after.
module nme
  import gnnear_pkg::*;
#(
  parameter int unsigned IREG_DEPTH = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [DIMM_W-1:0]             my_dimm,
  // channel
  input  ch_ca_t                        ch_ca,
  input  logic [BURST_W-1:0]            ch_wdata,
  output logic                          ch_rvalid,
  output logic [BURST_W-1:0]            ch_rdata,
  // ranks
  output rank_ca_t [NRANK-1:0]          rank_ca,
  output logic     [BURST_W-1:0]        rank_wdata,
  input  logic     [NRANK-1:0]          rank_rvalid,
  input  logic     [NRANK-1:0][BURST_W-1:0] rank_rdata,
  // status
  output logic                          init_done,
  output logic                          busy,
  output logic                          ireg_full,
  output logic [31:0]                   cnt_overlap,
  output logic [31:0]                   cnt_row_hit,
  output logic [31:0]                   cnt_row_miss,
  output logic [31:0]                   cnt_bcast_wr,
  output logic [31:0]                   cnt_bypass,
  output logic [31:0]                   cnt_dropped
);

  localparam int unsigned RW = ROW_BYTES*8;
  localparam int unsigned AW = $clog2(BUF_ROWS);

  // instruction register
  logic [INST_W-1:0] head;
  logic              head_v, pop;
  logic [$clog2(IREG_DEPTH+1)-1:0] ireg_cnt;

  nme_inst_register #(.DEPTH(IREG_DEPTH)) u_ireg (
    .clk, .rst_n,
    .push (ch_ca.cmd == CMD_NMP),
    .din  (ch_ca.inst),
    .pop  (pop),
    .dout (head),
    .valid(head_v),
    .full (ireg_full),
    .count(ireg_cnt)
  );

  dec_inst_t dec;
  nme_inst_decoder u_dec (.inst(head), .my_dimm(my_dimm), .dec(dec));

  // controller <-> arbiters
  rank_ca_t [NRANK-1:0] host_ca, nme_ca;
  logic     [NRANK-1:0] nme_gnt, host_win;

  // controller <-> buffer / EU
  logic          b_rd_en, b_wr_en;
  logic [AW-1:0] b_rd_addr, b_wr_addr;
  logic [RW-1:0] b_rd_data, b_wr_data;
  logic          e_valid, e_out_valid;
  red_op_e       e_op;
  bf16_t         e_w;
  logic [RW-1:0] e_x, e_psum, e_y;

  nme_controller u_ctrl (
    .clk, .rst_n, .my_dimm,
    .inst_valid (head_v), .inst(dec), .inst_pop(pop),
    .ch_ca, .ch_wdata, .ch_rvalid, .ch_rdata,
    .host_ca, .nme_ca, .nme_gnt,
    .dram_wdata (rank_wdata),
    .dram_rvalid(rank_rvalid), .dram_rdata(rank_rdata),
    .buf_rd_en(b_rd_en), .buf_rd_addr(b_rd_addr), .buf_rd_data(b_rd_data),
    .buf_wr_en(b_wr_en), .buf_wr_addr(b_wr_addr), .buf_wr_data(b_wr_data),
    .eu_valid(e_valid), .eu_op(e_op), .eu_edge_w(e_w), .eu_x(e_x), .eu_psum(e_psum),
    .eu_out_valid(e_out_valid), .eu_y(e_y),
    .init_done, .busy,
    .cnt_overlap, .cnt_row_hit, .cnt_row_miss, .cnt_bcast_wr, .cnt_bypass, .cnt_dropped
  );

  for (genvar r = 0; r < NRANK; r++) begin : g_arb
    nme_arbiter u_arb (
      .clk, .rst_n,
      .host_ca (host_ca[r]),
      .nme_ca  (nme_ca[r]),
      .nme_gnt (nme_gnt[r]),
      .host_win(host_win[r]),
      .rank_ca (rank_ca[r])
    );
  end

  nme_exec_unit u_eu (
    .clk, .rst_n,
    .in_valid (e_valid), .op(e_op), .edge_w(e_w), .x(e_x), .psum(e_psum),
    .out_valid(e_out_valid), .y(e_y)
  );

  nme_data_buffer u_buf (
    .clk,
    .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_data(b_rd_data),
    .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data)
  );

endmodule
