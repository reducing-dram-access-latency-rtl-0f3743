// tb_command_generator: random bank states and requests; checks the command
// needed (RD/WR on a row hit, PRE on a conflict, ACT on a closed bank) and the
// ready flag against the bank's timing flags and the bus turnaround flags.
//
// Purely combinational: inputs are set, #1 later need/row_hit/ready are
// compared with a reference decision (open matching row -> RD/WR gated by
// col_ok and the bus turnaround, other open row -> PRE gated by pre_ok, closed
// bank -> ACT gated by act_ok). 15,000 random cases.
module tb_command_generator;
  import cc_pkg::*;
  int checks = 0, failures = 0;
  mem_req_t req;
  logic [NUM_BANKS-1:0] bank_open, act_ok, col_ok, pre_ok;
  logic [NUM_BANKS-1:0][ROW_W-1:0] bank_row;
  logic rd_ok, wr_ok, row_hit, ready;
  cmd_e need;

  command_generator dut (.*);

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
    int n_hit = 0, n_conf = 0, n_closed = 0;
    for (int n = 0; n < 5000; n++) begin
      int b;
      cmd_e e; bit r;
      req = '0;
      b = $urandom_range(0, NUM_BANKS - 1);
      req.bank = BANK_W'(b); req.row = ROW_W'($urandom_range(0, 3)); req.we = 1'($urandom);
      bank_open = NUM_BANKS'($urandom); act_ok = NUM_BANKS'($urandom);
      col_ok = NUM_BANKS'($urandom); pre_ok = NUM_BANKS'($urandom);
      for (int k = 0; k < NUM_BANKS; k++) bank_row[k] = ROW_W'($urandom_range(0, 3));
      rd_ok = 1'($urandom); wr_ok = 1'($urandom);
      #1;
      if (!bank_open[b])               begin e = CMD_ACT; r = act_ok[b]; n_closed++; end
      else if (bank_row[b] != req.row) begin e = CMD_PRE; r = pre_ok[b]; n_conf++; end
      else begin
        e = req.we ? CMD_WR : CMD_RD;
        r = col_ok[b] && (req.we ? wr_ok : rd_ok);
        n_hit++;
      end
      check(need == e, $sformatf("command for case %0d", n));
      check(ready == r, "ready");
      check(row_hit == (e == CMD_RD || e == CMD_WR), "row_hit flag");
    end
    check(n_hit > 0 && n_conf > 0 && n_closed > 0, "all three cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
