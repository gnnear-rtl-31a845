// nme_inst_register: instruction register of a Near-Memory Engine.
//
// GNNear instructions that the CAE sends over the channel are held here until
// the controller can start them. The paper only names this block; it is built
// as a small first-in first-out queue (DEPTH entries, this design's choice) so
// that the CAE may send the load of the next shard while the current shard's
// C-type instructions are still executing (inter-shard overlapping).
//
// Interface: `push`/`din` write, `pop` removes the head shown on `dout` when
// `valid` is high. `full` and `count` report occupancy. Pushing into a full
// queue is a protocol error of the sender (the CAE schedules by the NME's
// fixed latencies and never does it); an assertion flags it.
module nme_inst_register
  import gnnear_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned WIDTH = INST_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       valid,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] q [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  logic do_push, do_pop;
  assign do_pop  = pop && (count != '0);
  assign do_push = push && (!full || do_pop);

  assign valid = (count != '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = q[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) q[wr_ptr] <= din;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(push && full && !pop))
    else $error("instruction register overflow");

endmodule
