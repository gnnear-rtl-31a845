// dram_rank_model: behavioural model of one DDR4 rank, for testbenches only.
//
// Takes the rank command bus (ACT, RD, WR, PRE) of an NME. Content that was
// never written is given by tb_util_pkg::dram_word(SEED, bank, row, col);
// written bursts are kept in an associative array. A RD returns its 64-byte
// burst on rvalid/rdata T_CL cycles after the command (one cycle per burst,
// the burst transfer being abstracted). WR data are taken with the command.
// The model checks the DDR4 timing the paper lists: ACT only to a precharged
// bank and at least tRP after its PRE, RD/WR only to the open row and at
// least tRCD after ACT, PRE at least tRAS after ACT; every breach increments
// `violations`. It also counts commands.
module dram_rank_model
  import gnnear_pkg::*;
  import tb_util_pkg::*;
#(
  parameter int SEED = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  rank_ca_t           ca,
  input  logic [BURST_W-1:0] wdata,
  output logic               rvalid,
  output logic [BURST_W-1:0] rdata,
  output int                 violations,
  output int                 n_act,
  output int                 n_rd,
  output int                 n_wr,
  output int                 n_pre
);

  logic [BURST_W-1:0] store [logic [ROW_W+BANK_W+COL_W-1:0]];
  logic [NBANK-1:0]   open;
  logic [ROW_W-1:0]   orow  [NBANK];
  longint             t_act [NBANK];
  longint             t_pre [NBANK];
  longint             now;
  logic               pv    [T_CL];
  logic [BURST_W-1:0] pd    [T_CL];

  function automatic logic [BURST_W-1:0] read_word(input int bank, input logic [ROW_W-1:0] row,
                                                   input int col);
    logic [ROW_W+BANK_W+COL_W-1:0] k;
    k = {row, BANK_W'(bank), COL_W'(col)};
    if (store.exists(k)) return store[k];
    return dram_word(SEED, bank, int'(row), col);
  endfunction

  assign rvalid = pv[T_CL-1];
  assign rdata  = pd[T_CL-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open <= '0; now <= 0; violations <= 0;
      n_act <= 0; n_rd <= 0; n_wr <= 0; n_pre <= 0;
      for (int b = 0; b < NBANK; b++) begin
        t_act[b] <= -1000; t_pre[b] <= -1000; orow[b] <= '0;
      end
      for (int i = 0; i < T_CL; i++) begin
        pv[i] <= 1'b0; pd[i] <= '0;
      end
    end else begin
      now <= now + 1;
      pv[0] <= 1'b0;
      for (int i = 1; i < T_CL; i++) begin
        pv[i] <= pv[i-1]; pd[i] <= pd[i-1];
      end
      unique case (ca.cmd)
        CMD_ACT: begin
          n_act <= n_act + 1;
          if (open[ca.bank] || now - t_pre[ca.bank] < T_RP) begin
            violations <= violations + 1;
            $display("%m: ACT violation bank %0d at %0d", ca.bank, now);
          end
          open[ca.bank]  <= 1'b1;
          orow[ca.bank]  <= ca.row;
          t_act[ca.bank] <= now;
        end
        CMD_PRE: begin
          n_pre <= n_pre + 1;
          if (open[ca.bank] && now - t_act[ca.bank] < T_RAS) begin
            violations <= violations + 1;
            $display("%m: PRE violation bank %0d at %0d", ca.bank, now);
          end
          open[ca.bank]  <= 1'b0;
          t_pre[ca.bank] <= now;
        end
        CMD_RD, CMD_WR: begin
          if (!open[ca.bank] || now - t_act[ca.bank] < T_RCD) begin
            violations <= violations + 1;
            $display("%m: column command violation bank %0d at %0d", ca.bank, now);
          end
          if (ca.cmd == CMD_RD) begin
            n_rd  <= n_rd + 1;
            pv[0] <= 1'b1;
            pd[0] <= read_word(int'(ca.bank), orow[ca.bank], int'(ca.col));
          end else begin
            n_wr <= n_wr + 1;
            store[{orow[ca.bank], ca.bank, ca.col}] = wdata;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
