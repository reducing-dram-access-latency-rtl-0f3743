// tb_bank_row_state: random ACT/PRE/PREA commands (only legal ones) against a
// reference array of open rows; checks open flags, open rows, owning cores
// and the close mask handed to ChargeCache.
//
// Drives the cmd/cmd_core inputs directly each cycle and compares open, open_row,
// open_core and the combinational close_mask with a reference array in the same
// cycle. What is checked (PREA closes every open bank, PRE one) follows the
// DDR3 command set; the random mix is this testbench's own.
module tb_bank_row_state;
  import cc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  dram_cmd_t cmd = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
  logic [CORE_W-1:0] cmd_core = '0;
  logic [NUM_BANKS-1:0] open, close_mask;
  logic [NUM_BANKS-1:0][ROW_W-1:0] open_row;
  logic [NUM_BANKS-1:0][CORE_W-1:0] open_core;

  bank_row_state dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  bit             r_open [NUM_BANKS];
  int             r_row  [NUM_BANKS];
  int             r_core [NUM_BANKS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_prea = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NUM_BANKS; b++) r_open[b] = 0;
    for (int n = 0; n < 2000; n++) begin
      int b, k;
      logic [NUM_BANKS-1:0] exp_close;
      @(negedge clk);
      b = $urandom_range(0, NUM_BANKS - 1);
      k = $urandom_range(0, 19);
      exp_close = '0;
      cmd.bank = BANK_W'(b); cmd.row = ROW_W'($urandom); cmd_core = CORE_W'($urandom);
      if (k == 0) begin
        cmd.cmd = CMD_PREA; n_prea++;
        for (int j = 0; j < NUM_BANKS; j++) exp_close[j] = r_open[j];
      end else if (r_open[b]) begin
        cmd.cmd = (k < 10) ? CMD_PRE : CMD_NOP;
        if (k < 10) exp_close[b] = 1'b1;
      end else cmd.cmd = CMD_ACT;
      #1;
      check(close_mask == exp_close, "close mask");
      for (int j = 0; j < NUM_BANKS; j++)
        if (exp_close[j]) check(open_row[j] == ROW_W'(r_row[j]) && open_core[j] == CORE_W'(r_core[j]),
                                "closed row/core handed over");
      // reference update
      if (cmd.cmd == CMD_ACT) begin r_open[b] = 1; r_row[b] = int'(cmd.row); r_core[b] = int'(cmd_core); end
      if (cmd.cmd == CMD_PRE) r_open[b] = 0;
      if (cmd.cmd == CMD_PREA) for (int j = 0; j < NUM_BANKS; j++) r_open[j] = 0;
      @(negedge clk); cmd.cmd = CMD_NOP; #1;
      for (int j = 0; j < NUM_BANKS; j++) begin
        check(open[j] == r_open[j], "open flag");
        if (r_open[j]) check(open_row[j] == ROW_W'(r_row[j]), "open row");
      end
    end
    check(n_prea > 0, "precharge-all exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
