// gnnear_pkg: types, constants and arithmetic shared by the GNNear RTL.
//
// Contents
//  * The 56-bit GNNear instruction formats (L, R, C and B type). Field order and
//    widths follow the instruction-format drawings: a 2-bit opcode first, then a
//    4-bit DIMM field, 40-bit Daddr / 16-bit Edge_W / 8-bit Dst_Index and a 10-bit
//    Vector_Size in the least significant bits. The B-type word has 44 reserved
//    bits between opcode and Vector_Size, which is what fixes the word at 56 bits.
//  * The vertex-data address map (Daddr bit fields) used by the NME to turn a
//    load into rank / bank / row / column, as drawn in the data-mapping figure.
//  * The DDR4 timing numbers of the evaluated system (DDR4-2400 LRDIMM), counted
//    in cycles of the single clock this RTL uses.
//  * BF16 multiply and add functions. BF16 is the data format of the design; the
//    rounding here is this design's own choice: results are truncated (round
//    toward zero), subnormals are flushed to zero and Inf/NaN inputs are not
//    given special treatment (exponent 255 saturates to Inf on overflow only).
//  * Structs for the channel command bus, the per-rank DRAM command bus, the
//    CAE-side instruction streams and the partial-result entries.
package gnnear_pkg;

  // ------------------------------------------------------------------ formats
  localparam int unsigned INST_W     = 56;   // instruction width (Fig. ISA)
  localparam int unsigned DADDR_W    = 40;   // L-type Daddr
  localparam int unsigned VSIZE_W    = 10;   // Vector_Size, in bytes
  localparam int unsigned DST_W      = 8;    // Dst_Index
  localparam int unsigned DIMM_W     = 4;    // DIMM field
  localparam int unsigned BF16_W     = 16;

  typedef logic [BF16_W-1:0] bf16_t;
  localparam bf16_t BF16_ONE  = 16'h3F80;
  localparam bf16_t BF16_ZERO = 16'h0000;

  typedef enum logic [1:0] {
    OPC_L = 2'b00,   // load a source vector from DRAM into the NME
    OPC_R = 2'b01,   // read a partial result out of the NME data buffer
    OPC_C = 2'b10,   // multiply-accumulate one edge into a partial result
    OPC_B = 2'b11    // following host writes are broadcast to all DIMMs
  } opcode_e;

  // Reduction operators of the C-type Op field. The figure lists
  // mean|sum|weighted_sum; the code values are this design's choice.
  typedef enum logic [1:0] {
    RED_MEAN  = 2'd0,   // edge weight carries 1/n
    RED_SUM   = 2'd1,   // edge weight forced to 1.0
    RED_WSUM  = 2'd2,   // edge weight from the instruction
    RED_RSVD  = 2'd3    // illegal
  } red_op_e;

  typedef struct packed {
    opcode_e                 opc;
    logic [DIMM_W-1:0]       dimm;
    logic [DADDR_W-1:0]      daddr;
    logic [VSIZE_W-1:0]      vsize;
  } l_inst_t;

  typedef struct packed {
    opcode_e                 opc;
    logic [DIMM_W-1:0]       dimm;
    logic [31:0]             rsvd;
    logic [DST_W-1:0]        dst;
    logic [VSIZE_W-1:0]      vsize;
  } r_inst_t;

  typedef struct packed {
    opcode_e                 opc;
    logic [DIMM_W-1:0]       dimm;
    red_op_e                 op;
    bf16_t                   edge_w;
    logic [13:0]             rsvd;
    logic [DST_W-1:0]        dst;
    logic [VSIZE_W-1:0]      vsize;
  } c_inst_t;

  typedef struct packed {
    opcode_e                 opc;
    logic [43:0]             rsvd;
    logic [VSIZE_W-1:0]      vsize;
  } b_inst_t;

  // Decoded instruction as handed from the decoder to the NME controller.
  typedef struct packed {
    opcode_e                 opc;
    logic [DIMM_W-1:0]       dimm;
    logic [DADDR_W-1:0]      daddr;
    logic [VSIZE_W-1:0]      vsize;
    red_op_e                 op;
    bf16_t                   edge_w;
    logic [DST_W-1:0]        dst;
    logic                    for_me;   // DIMM field matches, or B-type
    logic                    illegal;  // reserved Op code or zero size
  } dec_inst_t;

  function automatic logic [INST_W-1:0] mk_l(input logic [DIMM_W-1:0] dimm,
                                             input logic [DADDR_W-1:0] daddr,
                                             input logic [VSIZE_W-1:0] vsize);
    l_inst_t i;
    i.opc = OPC_L; i.dimm = dimm; i.daddr = daddr; i.vsize = vsize;
    return i;
  endfunction

  function automatic logic [INST_W-1:0] mk_c(input logic [DIMM_W-1:0] dimm,
                                             input red_op_e op, input bf16_t w,
                                             input logic [DST_W-1:0] dst,
                                             input logic [VSIZE_W-1:0] vsize);
    c_inst_t i;
    i.opc = OPC_C; i.dimm = dimm; i.op = op; i.edge_w = w; i.rsvd = '0;
    i.dst = dst; i.vsize = vsize;
    return i;
  endfunction

  function automatic logic [INST_W-1:0] mk_r(input logic [DIMM_W-1:0] dimm,
                                             input logic [DST_W-1:0] dst,
                                             input logic [VSIZE_W-1:0] vsize);
    r_inst_t i;
    i.opc = OPC_R; i.dimm = dimm; i.rsvd = '0; i.dst = dst; i.vsize = vsize;
    return i;
  endfunction

  function automatic logic [INST_W-1:0] mk_b(input logic [VSIZE_W-1:0] vsize);
    b_inst_t i;
    i.opc = OPC_B; i.rsvd = '0; i.vsize = vsize;
    return i;
  endfunction

  // ------------------------------------------------------------ address map
  // Daddr bits (data-mapping figure):
  //   [7:0] column (byte)  [8] rank  [11:9] row (Type)  [13:12] column
  //   [17:14] bank  [19:18] channel  [23:20] DIMM  [39:24] row
  localparam int unsigned ROW_W   = 19;
  localparam int unsigned BANK_W  = 4;
  localparam int unsigned COL_W   = 4;    // column in 64-byte burst units
  localparam int unsigned NRANK   = 2;    // ranks per DIMM (Table: 2 ranks)
  localparam int unsigned NBANK   = 16;
  localparam int unsigned BURST_BYTES = 64;   // BL8 x 64-bit DQ
  localparam int unsigned BURST_W     = BURST_BYTES*8;
  localparam int unsigned RANK_SPAN   = 256;  // bytes of a vector per rank

  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [BANK_W-1:0] bank;
    logic              rank;
    logic [COL_W-1:0]  col;
  } dram_loc_t;

  function automatic dram_loc_t daddr_to_loc(input logic [DADDR_W-1:0] a);
    dram_loc_t l;
    l.row  = {a[39:24], a[11:9]};
    l.bank = a[17:14];
    l.rank = a[8];
    l.col  = {a[13:12], a[7:6]};
    return l;
  endfunction

  function automatic logic [1:0] daddr_channel(input logic [DADDR_W-1:0] a);
    return a[19:18];
  endfunction

  function automatic logic [DIMM_W-1:0] daddr_dimm(input logic [DADDR_W-1:0] a);
    return a[23:20];
  endfunction

  // ------------------------------------------------------------ DDR timing
  // DDR4-2400 values of the evaluated memory system (Table: DRAM timing).
  localparam int unsigned T_RC   = 56;
  localparam int unsigned T_RCD  = 17;
  localparam int unsigned T_CL   = 17;
  localparam int unsigned T_RP   = 17;
  localparam int unsigned T_BL   = 4;
  localparam int unsigned T_RAS  = T_RC - T_RP;   // derived
  // Not in the paper: write latency and write recovery (this design's values).
  localparam int unsigned T_CWL  = 12;
  localparam int unsigned T_WR   = 18;

  // DDR command codes. CMD_NMP carries a 56-bit GNNear instruction over the
  // channel C/A bus; how an instruction rides the DDR interface is not
  // specified, this encoding is this design's choice.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4,
    CMD_NMP = 3'd5
  } ddr_cmd_e;

  // Channel command bus, CAE memory controller -> all DIMMs of a channel.
  typedef struct packed {
    ddr_cmd_e             cmd;
    logic [DIMM_W-1:0]    dimm;
    logic                 rank;
    logic [BANK_W-1:0]    bank;
    logic [ROW_W-1:0]     row;
    logic [COL_W-1:0]     col;
    logic [INST_W-1:0]    inst;
  } ch_ca_t;

  // Rank command bus, NME -> DRAM devices of one rank.
  typedef struct packed {
    ddr_cmd_e             cmd;
    logic [BANK_W-1:0]    bank;
    logic [ROW_W-1:0]     row;
    logic [COL_W-1:0]     col;
  } rank_ca_t;

  // ------------------------------------------------------------ NME sizing
  localparam int unsigned PE_LANES = 8;            // MACs per PE (Fig. EU)
  localparam int unsigned NUM_PE   = 16;           // PEs per NME (Table)
  localparam int unsigned ROW_BYTES = NUM_PE*PE_LANES*2;   // 256 B per EU pass
  localparam int unsigned SLOT_ROWS = 4;           // 1 KB per Dst_Index slot
  localparam int unsigned BUF_ROWS  = (1 << DST_W) * SLOT_ROWS;  // 256 KB
  localparam int unsigned SRC_WORDS = 16;          // 1 KB source slot, 64 B words

  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // ------------------------------------------------------------ CAE streams
  localparam int unsigned IVL_W = 16;   // interval index width

  // Entry of one DIMM's instruction stream into the CAE memory controller:
  // either a GNNear instruction or an end-of-interval marker.
  typedef struct packed {
    logic                 eoi;
    logic [IVL_W-1:0]     interval;
    logic [INST_W-1:0]    inst;
  } mc_entry_t;

  // Partial-result beat (64 B) from one DIMM, or its end-of-interval marker.
  typedef struct packed {
    logic                 eoi;
    logic [IVL_W-1:0]     interval;
    logic [DST_W-1:0]     dst;
    logic [3:0]           beat;
    logic [BURST_W-1:0]   data;
  } result_t;

  // ------------------------------------------------------------ BF16 math
  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] p;
    int          e;
    logic [6:0]  m;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (p[15]) begin
      m = p[14:8];
      e = e + 1;
    end else begin
      m = p[13:7];
    end
    if (e <= 0)   return {s, 15'd0};
    if (e >= 255) return {s, 8'hFF, 7'd0};
    return {s, e[7:0], m};
  endfunction

  function automatic bf16_t bf16_add(input bf16_t a, input bf16_t b);
    bf16_t       big, sml;
    logic [16:0] mb, ms, sum;
    int          eb, d, sh;
    if (a[14:7] == 8'd0) return (b[14:7] == 8'd0) ? 16'h0000 : b;
    if (b[14:7] == 8'd0) return a;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else begin big = b; sml = a; end
    eb = int'(big[14:7]);
    d  = eb - int'(sml[14:7]);
    mb = {1'b0, 1'b1, big[6:0], 8'd0};
    ms = (d > 16) ? 17'd0 : ({1'b0, 1'b1, sml[6:0], 8'd0} >> d);
    if (big[15] == sml[15]) begin
      sum = mb + ms;
      if (sum[16]) begin
        sum = sum >> 1;
        eb  = eb + 1;
      end
    end else begin
      sum = mb - ms;
      if (sum == 17'd0) return 16'h0000;
      sh = 0;
      for (int i = 15; i >= 0; i--) begin
        if (sum[i] && sh == 0) sh = 16 - i;
      end
      sum = sum << (sh - 1);
      eb  = eb - (sh - 1);
    end
    if (eb <= 0)   return 16'h0000;
    if (eb >= 255) return {big[15], 8'hFF, 7'd0};
    return {big[15], eb[7:0], sum[14:8]};
  endfunction

  // ------------------------------------------------------------ CAE VPU
  // Element-wise operations of the vector-processing unit (encoding is this
  // design's choice).
  typedef enum logic [2:0] {
    VOP_ADD   = 3'd0,
    VOP_MUL   = 3'd1,
    VOP_FMA   = 3'd2,
    VOP_AXPY  = 3'd3,
    VOP_RELU  = 3'd4,
    VOP_DRELU = 3'd5,
    VOP_SCALE = 3'd6
  } vop_e;

endpackage
