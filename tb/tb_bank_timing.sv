// tb_bank_timing: measures, cycle by cycle, when one bank allows each command:
// ACT -> RD after tRCD = 11 (7 with ChargeCache), ACT -> PRE after tRAS = 28
// (20 with ChargeCache), PRE -> ACT after tRP = 11, RD -> PRE after tRTP,
// WR -> PRE after tCWL + tBL + tWR, REF -> ACT after tRFC.
//
// Each case issues one command on cmd/sel (with act_fast for the ChargeCache
// case) and counts clock edges until act_ok/col_ok/pre_ok rise. tRCD/tRAS and
// their 4/8-cycle reductions are the paper's numbers; the others are the DDR3
// values this design chose.
module tb_bank_timing;
  import cc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cmd_e cmd = CMD_NOP;
  logic sel = 0, act_fast = 0;
  logic act_ok, col_ok, pre_ok;

  bank_timing dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // issue a command for one cycle, then count cycles until 'which' is ok
  task automatic issue(cmd_e c, bit fast);
    @(negedge clk); cmd = c; sel = 1; act_fast = fast;
    @(negedge clk); cmd = CMD_NOP; sel = 0; act_fast = 0;
  endtask
  // returns the gap (in cycles) between the command and the first cycle the flag is high
  task automatic gap(cmd_e c, bit fast, int which, output int g);
    @(negedge clk); cmd = c; sel = 1; act_fast = fast;
    @(negedge clk); cmd = CMD_NOP; sel = 0; act_fast = 0;
    g = 1;
    while (!((which == 0) ? act_ok : (which == 1) ? col_ok : pre_ok)) begin
      @(negedge clk); g++;
      if (g > 1000) break;
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(act_ok && col_ok && pre_ok, "all allowed after reset");
    gap(CMD_ACT, 0, 1, g); check(g == T_RCD, $sformatf("tRCD default %0d", g));
    repeat (40) @(negedge clk);
    gap(CMD_ACT, 0, 2, g); check(g == T_RAS, $sformatf("tRAS default %0d", g));
    gap(CMD_PRE, 0, 0, g); check(g == T_RP,  $sformatf("tRP %0d", g));
    gap(CMD_ACT, 1, 1, g); check(g == 7, $sformatf("tRCD lowered = 7 (%0d)", g));
    repeat (40) @(negedge clk);
    gap(CMD_ACT, 1, 2, g); check(g == 20, $sformatf("tRAS lowered = 20 (%0d)", g));
    gap(CMD_RD, 0, 2, g); check(g == T_RTP, $sformatf("tRTP %0d", g));
    gap(CMD_WR, 0, 2, g); check(g == T_CWL + T_BL + T_WR, $sformatf("write recovery %0d", g));
    gap(CMD_PREA, 0, 0, g); check(g == T_RP, $sformatf("PREA tRP %0d", g));
    gap(CMD_REF, 0, 0, g); check(g == T_RFC, $sformatf("tRFC %0d", g));
    // a shorter constraint does not cut a longer one: ACT then RD at tRCD, PRE still waits tRAS
    issue(CMD_ACT, 0);
    repeat (T_RCD - 1) @(negedge clk);
    gap(CMD_RD, 0, 2, g); check(g == T_RAS - T_RCD - 1, $sformatf("tRAS kept after RD (%0d)", g));
    // a command to another bank (sel low) does not disturb the counters
    @(negedge clk); cmd = CMD_ACT; sel = 0;
    @(negedge clk); cmd = CMD_NOP; #1;
    check(act_ok && col_ok && pre_ok, "unselected command ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
