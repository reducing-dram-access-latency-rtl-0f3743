// bank_row_state: which row is open in each bank of the channel.
//
// The memory controller needs, per bank, whether a row is open and which one,
// to decide between a row hit, a row conflict and a closed bank; ChargeCache
// takes from it the row address to insert when a bank is precharged. This
// block also remembers which core's request opened the row, so the address is
// inserted into that core's HCRAC.
//
// Updates at the rising clock edge after the command is issued:
//   ACT  - marks the bank open with the given row and core;
//   PRE  - closes the bank;
//   PREA - closes every bank.
// close_mask is combinational: the banks that the command issued this cycle
// closes while they held an open row (the rows to insert into ChargeCache).
//
// Follows the paper: per-bank row state as the source of inserted addresses.
// This design's own choice: the core field, and resetting every bank to
// closed (DRAM initialisation ends with all banks precharged).
module bank_row_state
  import cc_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  dram_cmd_t                        cmd,
  input  logic [CORE_W-1:0]                cmd_core,
  output logic [NUM_BANKS-1:0]             open,
  output logic [NUM_BANKS-1:0][ROW_W-1:0]  open_row,
  output logic [NUM_BANKS-1:0][CORE_W-1:0] open_core,
  output logic [NUM_BANKS-1:0]             close_mask
);

  always_comb begin
    close_mask = '0;
    if (cmd.cmd == CMD_PREA)     close_mask = open;
    else if (cmd.cmd == CMD_PRE) close_mask[cmd.bank] = open[cmd.bank];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open <= '0;
    end else begin
      unique case (cmd.cmd)
        CMD_ACT: begin
          open[cmd.bank]      <= 1'b1;
          open_row[cmd.bank]  <= cmd.row;
          open_core[cmd.bank] <= cmd_core;
        end
        CMD_PRE:  open[cmd.bank] <= 1'b0;
        CMD_PREA: open <= '0;
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cmd.cmd == CMD_ACT |-> !open[cmd.bank])
    else $error("bank_row_state: ACT to a bank with an open row");
  assert property (@(posedge clk) disable iff (!rst_n) (cmd.cmd == CMD_RD || cmd.cmd == CMD_WR) |-> open[cmd.bank])
    else $error("bank_row_state: column command to a closed bank");

endmodule
