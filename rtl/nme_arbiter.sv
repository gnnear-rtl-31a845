// nme_arbiter: command arbiter in front of one rank of an LRDIMM.
//
// The NME's command/address port to each rank is shared by two sources: DDR
// commands that the CAE-side memory controller sends for ordinary accesses
// (which the NME passes through, bypassing its execution unit) and commands
// the NME controller generates itself to carry out L-type loads. The paper
// names the "Arbiter" next to the PHY and states that standard commands
// bypass the execution unit; the policy here is this design's choice: a
// bypassed host command always wins (the CAE owns the bus timing), an NME
// request is held until granted, and the result is registered once before it
// leaves for the DRAM devices.
//
// Timing: `nme_gnt` is combinational in the request cycle; the granted command
// appears on `rank_ca` one cycle later.
module nme_arbiter
  import gnnear_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  rank_ca_t  host_ca,      // host command bypassed to this rank
  input  rank_ca_t  nme_ca,       // NME command request (cmd != NOP)
  output logic      nme_gnt,
  output logic      host_win,     // a host command was passed this cycle
  output rank_ca_t  rank_ca
);

  logic host_req, nme_req;
  assign host_req = (host_ca.cmd != CMD_NOP);
  assign nme_req  = (nme_ca.cmd  != CMD_NOP);
  assign host_win = host_req;
  assign nme_gnt  = nme_req && !host_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        rank_ca <= '0;
    else if (host_req) rank_ca <= host_ca;
    else if (nme_req)  rank_ca <= nme_ca;
    else               rank_ca <= '0;
  end

endmodule
