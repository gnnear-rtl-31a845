// cae_result_fifo: partial-result FIFO in the CAE, one per DIMM.
//
// Window-based interval scheduling gives every DIMM its own FIFO in the CAE.
// The memory controller pushes the 64-byte partial-result beats that an NME
// returns for its R-type instructions, and the DIMM's end-of-interval markers,
// in the order they were produced; the window buffer pops and merges them.
// The paper names the FIFOs and their role; depth and the `free` count that
// the memory controller uses as credit are this design's choices.
//
// Interface: `push`/`din`, `pop`/`dout`/`valid` (first-word fall-through),
// `free` = entries still available. Pushing into a full FIFO is an error.
module cae_result_fifo
  import gnnear_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  result_t                    din,
  input  logic                       pop,
  output result_t                    dout,
  output logic                       valid,
  output logic [$clog2(DEPTH+1)-1:0] free
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  result_t       q [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [CW-1:0] cnt;
  logic          do_pop;

  assign do_pop = pop && valid;
  assign valid  = (cnt != '0);
  assign free   = CW'(DEPTH) - cnt;
  assign dout   = q[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push)   wp <= wp + 1'b1;
      if (do_pop) rp <= rp + 1'b1;
      cnt <= cnt + CW'(push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[wp] <= din;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(push && cnt == CW'(DEPTH) && !do_pop))
    else $error("result FIFO overflow");

endmodule
