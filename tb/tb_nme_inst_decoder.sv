// tb_nme_inst_decoder: checks the decoding of the four GNNear instruction
// formats. Instructions are assembled here bit by bit from the field layout
// (56 bits, MSB first):
//   L: 00 | DIMM[4] | Daddr[40] | Vsize[10]
//   R: 01 | DIMM[4] | reserved[32] | Dst[8] | Vsize[10]
//   C: 10 | DIMM[4] | Op[2] | Edge_W[16] | reserved[14] | Dst[8] | Vsize[10]
//   B: 11 | reserved[44] | Vsize[10]
// and the decoded fields, the DIMM match and the illegal flag are compared.
module tb_nme_inst_decoder;
  import gnnear_pkg::*;

  logic [INST_W-1:0] inst;
  logic [DIMM_W-1:0] my_dimm;
  dec_inst_t dec;
  int checks = 0, failures = 0;

  nme_inst_decoder dut (.inst, .my_dimm, .dec);

  task automatic expect_eq(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("%s: got %0h want %0h", what, got, want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0]  dimm;
    logic [39:0] daddr;
    logic [9:0]  vsize;
    logic [7:0]  dst;
    logic [1:0]  op;
    logic [15:0] ew;
    for (int it = 0; it < 400; it++) begin
      dimm  = 4'($urandom);
      my_dimm = (it % 2 == 0) ? dimm : 4'($urandom);
      daddr = {8'($urandom), 32'($urandom)};
      vsize = 10'($urandom_range(0, 1023));
      dst   = 8'($urandom);
      op    = 2'($urandom);
      ew    = 16'($urandom);
      unique case (it % 4)
        0: begin
          inst = {2'b00, dimm, daddr, vsize};
          #1;
          expect_eq("L opc", dec.opc, 0);
          expect_eq("L daddr", dec.daddr, daddr);
        end
        1: begin
          inst = {2'b01, dimm, 32'($urandom), dst, vsize};
          #1;
          expect_eq("R opc", dec.opc, 1);
          expect_eq("R dst", dec.dst, dst);
        end
        2: begin
          inst = {2'b10, dimm, op, ew, 14'($urandom), dst, vsize};
          #1;
          expect_eq("C opc", dec.opc, 2);
          expect_eq("C op", dec.op, op);
          expect_eq("C edge_w", dec.edge_w, ew);
          expect_eq("C dst", dec.dst, dst);
        end
        default: begin
          inst = {2'b11, 44'd0, vsize};
          #1;
          expect_eq("B opc", dec.opc, 3);
          expect_eq("B for_me", dec.for_me, 1);
        end
      endcase
      expect_eq("vsize", dec.vsize, vsize);
      if (it % 4 != 3) expect_eq("for_me", dec.for_me, dimm == my_dimm);
      expect_eq("illegal", dec.illegal, vsize == 0 || (it % 4 == 2 && op == 2'd3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
