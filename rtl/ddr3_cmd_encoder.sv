// ddr3_cmd_encoder: DDR3 command/address pin encoding.
//
// Maps a command to the CKE, CS#, RAS#, CAS# and WE# pins (active low) and the
// bank/address pins, following the DDR3 truth table:
//            CS# RAS# CAS# WE#   address
//   NOP       0    1    1    1
//   ACT       0    0    1    1   row
//   RD        0    1    0    1   column, A10=0 (no auto-precharge), A12=1 (BL8)
//   WR        0    1    0    0   column, A10=0, A12=1
//   PRE       0    0    1    0   A10=0 (one bank)
//   PREA      0    0    1    0   A10=1 (all banks)
//   REF       0    0    0    1
// A cache line is one burst of 8 columns, so the column address is the line
// index followed by three zero bits. CKE is held high (no power-down) and CS#
// low (one rank per channel, so idle cycles carry a NOP, not a deselect).
// Purely combinational.
//
// Follows the paper's description of the five command signals (a read enables
// CAS only, a write enables CAS and WE). The rest of the table is the DDR3
// standard's, not the paper's.
module ddr3_cmd_encoder
  import cc_pkg::*;
(
  input  dram_cmd_t  cmd,
  output ddr3_pins_t pins
);

  always_comb begin
    pins       = '0;
    pins.cke   = 1'b1;
    pins.cs_n  = 1'b0;
    pins.ras_n = 1'b1;
    pins.cas_n = 1'b1;
    pins.we_n  = 1'b1;
    pins.ba    = cmd.bank;
    unique case (cmd.cmd)
      CMD_ACT: begin
        pins.ras_n = 1'b0;
        pins.a     = 16'(cmd.row);
      end
      CMD_RD, CMD_WR: begin
        pins.cas_n    = 1'b0;
        pins.we_n     = (cmd.cmd == CMD_RD);
        pins.a[9:0]   = {cmd.col, 3'b000};
        pins.a[12]    = 1'b1;
      end
      CMD_PRE, CMD_PREA: begin
        pins.ras_n = 1'b0;
        pins.we_n  = 1'b0;
        pins.a[10] = (cmd.cmd == CMD_PREA);
      end
      CMD_REF: begin
        pins.ras_n = 1'b0;
        pins.cas_n = 1'b0;
      end
      default: pins.ba = '0;   // NOP
    endcase
  end

endmodule
