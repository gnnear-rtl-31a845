// nme_inst_decoder: decodes a 56-bit GNNear instruction inside an NME.
//
// Field layout (instruction-format figures of the paper, MSB first):
//   L: opc=00 | DIMM[4] | Daddr[40]                       | Vector_Size[10]
//   R: opc=01 | DIMM[4] | reserved[32]       | Dst_Index[8] | Vector_Size[10]
//   C: opc=10 | DIMM[4] | Op[2] | Edge_W[16] | reserved[14] | Dst_Index[8] | Vector_Size[10]
//   B: opc=11 | reserved[44]                              | Vector_Size[10]
// `for_me` is set when the DIMM field equals this NME's id, or always for a
// B-type, which every DIMM of the channel executes. `illegal` marks the unused
// Op code 3 and a zero Vector_Size, both of which the controller drops.
// Purely combinational.
module nme_inst_decoder
  import gnnear_pkg::*;
(
  input  logic [INST_W-1:0] inst,
  input  logic [DIMM_W-1:0] my_dimm,
  output dec_inst_t         dec
);

  l_inst_t li;
  c_inst_t ci;
  r_inst_t ri;
  b_inst_t bi;

  assign li = inst;
  assign ci = inst;
  assign ri = inst;
  assign bi = inst;

  always_comb begin
    dec         = '0;
    dec.opc     = li.opc;
    dec.dimm    = li.dimm;
    dec.vsize   = li.vsize;
    unique case (li.opc)
      OPC_L: dec.daddr = li.daddr;
      OPC_C: begin
        dec.op     = ci.op;
        dec.edge_w = ci.edge_w;
        dec.dst    = ci.dst;
      end
      OPC_R: dec.dst = ri.dst;
      OPC_B: begin
        dec.dimm  = '0;
        dec.vsize = bi.vsize;
      end
    endcase
    dec.for_me  = (li.opc == OPC_B) || (li.dimm == my_dimm);
    dec.illegal = (li.vsize == '0) || (li.opc == OPC_C && ci.op == RED_RSVD);
  end

endmodule
