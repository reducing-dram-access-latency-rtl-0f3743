// tb_frfcfs_scheduler: directed cases for the command choice of an 8-entry
// scheduler: first-ready (a ready row hit beats an older ACT), oldest-first
// among row commands, no conflict precharge while the open row still has
// buffered hits, the closed-row policy's idle precharge, refresh (PREA, then
// REF, nothing else while due), and reads held back when the response path
// is full.
//
// The combinational outputs (cmd, cmd_core, pop_en/pop_idx, rd_stall) are
// checked a moment after the buffer contents and bank state are set. FR-FCFS
// and the two row policies are the paper's; the refresh sequence and the
// read-stall rule are this design's.
module tb_frfcfs_scheduler;
  import cc_pkg::*;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;

  mem_req_t entries [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [NUM_BANKS-1:0] bank_open, act_ok, col_ok, pre_ok;
  logic [NUM_BANKS-1:0][ROW_W-1:0] bank_row;
  logic rd_ok, wr_ok, rd_space, ref_due, closed_row;
  dram_cmd_t cmd;
  logic [CORE_W-1:0] cmd_core;
  logic pop_en, rd_stall;
  logic [2:0] pop_idx;

  frfcfs_scheduler #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (got %s bank %0d)", m, cmd.cmd.name(), cmd.bank); end
  endtask

  task automatic clear();
    for (int i = 0; i < DEPTH; i++) entries[i] = '0;
    valid = '0; bank_open = '0; act_ok = '1; col_ok = '1; pre_ok = '1; bank_row = '0;
    rd_ok = 1; wr_ok = 1; rd_space = 1; ref_due = 0; closed_row = 0;
  endtask
  task automatic put(int i, int bank, int row, bit we, int core);
    entries[i].bank = BANK_W'(bank); entries[i].row = ROW_W'(row);
    entries[i].we = we; entries[i].core = CORE_W'(core); entries[i].id = ID_W'(i);
    valid[i] = 1'b1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1. first-ready: entry0 needs ACT (bank 0 closed), entry1 is a ready RD hit on bank 1
    clear(); put(0, 0, 5, 0, 2); put(1, 1, 7, 0, 3); bank_open[1] = 1; bank_row[1] = 7; #1;
    check(cmd.cmd == CMD_RD && cmd.bank == 1 && pop_en && pop_idx == 1 && cmd_core == 3, "row hit first");
    // 2. the hit is not ready (tRCD): the older ACT goes
    col_ok[1] = 0; #1;
    check(cmd.cmd == CMD_ACT && cmd.bank == 0 && cmd.row == 5 && !pop_en && cmd_core == 2, "oldest ACT when no hit ready");
    // 3. oldest first among row commands
    clear(); put(0, 3, 1, 0, 0); put(1, 2, 1, 0, 0); #1;
    check(cmd.cmd == CMD_ACT && cmd.bank == 3, "oldest ACT");
    act_ok[3] = 0; #1;
    check(cmd.cmd == CMD_ACT && cmd.bank == 2, "next ACT when oldest not ready");
    // 4. conflict on bank 4 (open row 9) with a buffered hit to row 9 not yet ready
    clear(); put(0, 4, 1, 0, 0); put(1, 4, 9, 1, 0); bank_open[4] = 1; bank_row[4] = 9; wr_ok = 0; #1;
    check(cmd.cmd == CMD_NOP, "no conflict PRE while the open row has hits");
    wr_ok = 1; #1;
    check(cmd.cmd == CMD_WR && pop_idx == 1, "the hit (WR) is served");
    valid[1] = 0; #1;
    check(cmd.cmd == CMD_PRE && cmd.bank == 4, "conflict PRE once no hit remains");
    // 5. row policy: bank 6 open, nothing wants it
    clear(); bank_open[6] = 1; bank_row[6] = 3; #1;
    check(cmd.cmd == CMD_NOP, "open-row policy keeps an idle row open");
    closed_row = 1; #1;
    check(cmd.cmd == CMD_PRE && cmd.bank == 6, "closed-row policy closes an idle row");
    put(0, 6, 3, 0, 0); col_ok[6] = 0; #1;
    check(cmd.cmd == CMD_NOP, "closed-row policy keeps a row with a pending hit");
    // 6. refresh
    clear(); put(0, 1, 1, 0, 0); bank_open[1] = 1; bank_row[1] = 1; bank_open[5] = 1; ref_due = 1; pre_ok[5] = 0; #1;
    check(cmd.cmd == CMD_NOP && !pop_en, "refresh waits for tRAS of every open bank, no RD meanwhile");
    pre_ok[5] = 1; #1;
    check(cmd.cmd == CMD_PREA, "PREA when refresh is due");
    bank_open = '0; act_ok[2] = 0; #1;
    check(cmd.cmd == CMD_NOP, "REF waits for tRP");
    act_ok = '1; #1;
    check(cmd.cmd == CMD_REF, "REF");
    // 7. full response path: the RD is held, a WR hit can still go
    clear(); put(0, 1, 1, 0, 0); put(1, 2, 2, 1, 0); bank_open = 8'b0000_0110; bank_row[1] = 1; bank_row[2] = 2; rd_space = 0; #1;
    check(cmd.cmd == CMD_WR && pop_idx == 1 && rd_stall, "RD held back, WR issued");
    valid[1] = 0; #1;
    check(cmd.cmd == CMD_NOP && rd_stall, "RD stalls with a full response buffer");
    rd_space = 1; #1;
    check(cmd.cmd == CMD_RD && !rd_stall, "RD goes once there is room");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
