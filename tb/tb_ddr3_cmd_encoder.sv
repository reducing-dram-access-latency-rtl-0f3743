// tb_ddr3_cmd_encoder: checks the CS#/RAS#/CAS#/WE# pattern and the address
// pins of every command against the DDR3 truth table.
//
// Combinational: each of the seven commands is applied in turn with random
// bank/row/column; #1 later the pins are compared with the DDR3 truth table
// (the pin levels are standard DDR3; the paper only names the pins). CKE must
// stay high.
module tb_ddr3_cmd_encoder;
  import cc_pkg::*;
  int checks = 0, failures = 0;
  dram_cmd_t cmd;
  ddr3_pins_t pins;

  ddr3_cmd_encoder dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_e list [7] = '{CMD_NOP, CMD_ACT, CMD_PRE, CMD_PREA, CMD_RD, CMD_WR, CMD_REF};
    logic [3:0] exp [7] = '{4'b0111, 4'b0011, 4'b0010, 4'b0010, 4'b0101, 4'b0100, 4'b0001};
    for (int n = 0; n < 200; n++) begin
      int k;
      k = n % 7;
      cmd.cmd = list[k]; cmd.bank = BANK_W'($urandom); cmd.row = ROW_W'($urandom); cmd.col = COL_W'($urandom);
      #1;
      check(pins.cke == 1'b1, "CKE high");
      check({pins.cs_n, pins.ras_n, pins.cas_n, pins.we_n} == exp[k], $sformatf("pins of %s", cmd.cmd.name()));
      if (cmd.cmd != CMD_NOP) check(pins.ba == cmd.bank, "bank pins");
      if (cmd.cmd == CMD_ACT) check(pins.a == 16'(cmd.row), "row on address pins");
      if (cmd.cmd == CMD_RD || cmd.cmd == CMD_WR)
        check(pins.a[9:0] == {cmd.col, 3'b000} && !pins.a[10] && pins.a[12], "column address, no auto-precharge, BL8");
      if (cmd.cmd == CMD_PRE)  check(!pins.a[10], "PRE: A10 low");
      if (cmd.cmd == CMD_PREA) check(pins.a[10], "PREA: A10 high");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
