// tb_nme_arbiter: checks the rank arbiter of the NME.
// Random host (bypass) and NME commands: a host command must always reach the
// rank one cycle later, an NME command only when no host command is present
// (nme_gnt), and an idle cycle must give NOP.
module tb_nme_arbiter;
  import gnnear_pkg::*;

  logic clk = 0, rst_n = 0, nme_gnt, host_win;
  rank_ca_t host_ca, nme_ca, rank_ca, want;
  int checks = 0, failures = 0, n_host = 0, n_nme = 0, n_blocked = 0;

  nme_arbiter dut (.clk, .rst_n, .host_ca, .nme_ca, .nme_gnt, .host_win, .rank_ca);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic rank_ca_t rnd_cmd(input bit active);
    rank_ca_t c;
    c.cmd  = active ? ddr_cmd_e'($urandom_range(1, 4)) : CMD_NOP;
    c.bank = 4'($urandom);
    c.row  = 19'($urandom);
    c.col  = 4'($urandom);
    return c;
  endfunction

  initial begin
    host_ca = '0; nme_ca = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      host_ca = rnd_cmd($urandom_range(0, 2) == 0);
      nme_ca  = rnd_cmd($urandom_range(0, 1) == 0);
      #1;
      checks++;
      if (nme_gnt != (nme_ca.cmd != CMD_NOP && host_ca.cmd == CMD_NOP) ||
          host_win != (host_ca.cmd != CMD_NOP)) begin
        failures++;
        $display("grant wrong");
      end
      if (host_ca.cmd != CMD_NOP) begin
        want = host_ca; n_host++;
        if (nme_ca.cmd != CMD_NOP) n_blocked++;
      end else if (nme_ca.cmd != CMD_NOP) begin
        want = nme_ca; n_nme++;
      end else begin
        want = '0;
      end
      @(negedge clk);
      checks++;
      if (rank_ca != want) begin
        failures++;
        $display("rank command wrong at %0d", it);
      end
    end
    checks++;
    if (n_host == 0 || n_nme == 0 || n_blocked == 0) failures++;
    $display("host %0d nme %0d nme-held %0d", n_host, n_nme, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
