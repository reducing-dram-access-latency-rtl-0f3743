// tb_chargecache_system_full: end-to-end test of the two-channel ChargeCache memory system,
// with every parameter at its default: 8 cores, 64-entry request buffers,
// 128-entry 2-way HCRACs per core, 1 ms (800,000-cycle) caching duration,
// tREFI 6240 cycles. The run is shorter than one invalidation sweep of all
// entries, so it shows sweeps but not an expiry.
//
// Each of 8 cores owns 1 rows in every bank, so requests of different
// cores to the same bank conflict and rows are closed and reopened soon after
// (row-level temporal locality). Phase 1 writes every line of the region;
// phase 2 issues a random mix of reads (data checked against what was written)
// and writes from all cores, first under the open-row and then under the
// closed-row policy, with a stalling response port. A DRAM model on each
// channel checks every command against the DDR3 timing rules and checks that
// lowered tRCD/tRAS are used only for rows precharged within the caching
// duration. Counted and required at least once on each channel: ChargeCache
// hits (and the lowered tRCD seen on the pins), HCRAC insertions, PREA, REF,
// read stalls on a full response buffer; invalidation sweeps are required
// whenever the run is longer than one sweep period.
module tb_chargecache_system_full;
  import cc_pkg::*;
  localparam int NCH = 2;
  localparam int NCORES = 8;
  localparam int C = 800000;
  localparam int ROWS = 1;
  localparam int NREQ = 6000;
  localparam int SWEEP = C / 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic closed_row = 0;
  logic req_valid = 0, req_ready, req_we = 0, resp_valid, resp_ready;
  logic [CORE_W-1:0] req_core = '0, resp_core;
  logic [ID_W-1:0] req_id = '0, resp_id;
  logic [1+COL_W+BANK_W+ROW_W-1:0] req_addr = '0;
  logic [DATA_W-1:0] req_wdata = '0, resp_rdata;
  ddr3_pins_t ddr_pins [NCH];
  logic [NCH-1:0] ddr_wvalid, ddr_rvalid;
  logic [DATA_W-1:0] ddr_wdata [NCH], ddr_rdata [NCH];
  ch_events_t events [NCH];
  int violations [NCH], fast_acts [NCH], n_act [NCH], n_ref [NCH], n_elig [NCH];

  chargecache_system dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_dram
    ddr3_channel_model #(.CACHING_CYCLES(C)) dram (
      .clk, .rst_n, .pins(ddr_pins[c]), .wvalid(ddr_wvalid[c]), .wdata(ddr_wdata[c]),
      .rvalid(ddr_rvalid[c]), .rdata(ddr_rdata[c]), .violations(violations[c]),
      .fast_acts(fast_acts[c]), .n_act(n_act[c]), .n_ref(n_ref[c]), .n_elig(n_elig[c]));
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------- statistics ----------------
  int e_act [NCH], e_fast [NCH], e_prea [NCH], e_ref [NCH], e_ins [NCH], e_inv [NCH], e_stall [NCH];
  int cycle = 0;
  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int c = 0; c < NCH; c++) begin
      e_act[c] += int'(events[c].act);   e_fast[c] += int'(events[c].act_fast);
      e_prea[c] += int'(events[c].prea); e_ref[c] += int'(events[c].refresh);
      e_ins[c] += int'(events[c].cc_insert); e_inv[c] += int'(events[c].cc_inval);
      e_stall[c] += int'(events[c].rd_stall);
    end
  end

  // ---------------- responses ----------------
  logic [DATA_W-1:0] exp_data [int];
  int outstanding = 0;
  always @(posedge clk) if (rst_n && resp_valid && resp_ready) begin
    int key;
    key = {int'(resp_core), int'(resp_id)};
    outstanding--;
    check(exp_data.exists(key), "response to an issued read");
    if (exp_data.exists(key)) begin
      check(resp_rdata == exp_data[key], $sformatf("read data core %0d id %0d", resp_core, resp_id));
      exp_data.delete(key);
    end
  end
  bit resp_random = 0;
  always @(negedge clk) resp_ready <= !resp_random || ($urandom_range(0, 99) < 20);

  function automatic logic [DATA_W-1:0] pattern(int seed);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(seed * 7919 + i * 104729 + 17);
    return d;
  endfunction
  // line address: row : bank : column : channel
  function automatic int addr(int ch, int bank, int row, int col);
    return ((row * NUM_BANKS + bank) * 128 + col) * 2 + ch;
  endfunction

  task automatic send(bit we, int core, int id, int a, logic [DATA_W-1:0] d);
    @(negedge clk);
    req_valid = 1; req_we = we; req_core = CORE_W'(core); req_id = ID_W'(id);
    req_addr = $bits(req_addr)'(a); req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req_valid = 0;
  endtask

  logic [DATA_W-1:0] shadow [int];
  int next_id [NCORES];

  // one random access of core 'core' to its own rows
  task automatic access(int core, bit allow_write);
    int ch, b, r, c, a;
    ch = $urandom_range(0, 1); b = $urandom_range(0, NUM_BANKS - 1);
    r = core * ROWS + $urandom_range(0, ROWS - 1); c = $urandom_range(0, 3);
    a = addr(ch, b, r, c);
    if (allow_write && $urandom_range(0, 99) < 20) begin
      // only write lines with no read in flight: use a separate column range
      a = addr(ch, b, r, 4 + c);
      shadow[a] = pattern(a + cycle);
      send(1, core, 0, a, shadow[a]);
    end else begin
      int key;
      key = {core, next_id[core]};
      if (exp_data.exists(key)) return;   // id still in flight
      exp_data[key] = shadow[a];
      outstanding++;
      send(0, core, next_id[core], a, '0);
      next_id[core] = (next_id[core] + 1) % 256;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits_before;
    for (int k = 0; k < NCORES; k++) next_id[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: write the region read later (columns 0..3 of every row of every core)
    for (int r = 0; r < NCORES * ROWS; r++) for (int b = 0; b < NUM_BANKS; b++)
      for (int ch = 0; ch < NCH; ch++) for (int c = 0; c < 4; c++) begin
        int a;
        a = addr(ch, b, r, c);
        shadow[a] = pattern(a);
        send(1, r / ROWS, 0, a, shadow[a]);
      end
    repeat (400) @(negedge clk);
    // phase 2: random reads and writes, open-row then closed-row policy
    for (int phase = 0; phase < 2; phase++) begin
      closed_row = (phase == 1);
      hits_before = e_fast[0] + e_fast[1];
      resp_random = 1;
      for (int n = 0; n < NREQ; n++) begin
        access($urandom_range(0, NCORES - 1), 1);
        if ($urandom_range(0, 99) < 5) repeat ($urandom_range(1, 30)) @(negedge clk);
      end
      resp_random = 0;
      repeat (600) @(negedge clk);
      check(e_fast[0] + e_fast[1] > hits_before, $sformatf("ChargeCache hits under row policy %0d", phase));
    end
    check(outstanding == 0 && exp_data.size() == 0, $sformatf("every read answered (%0d left)", outstanding));
    for (int c = 0; c < NCH; c++) begin
      check(violations[c] == 0, $sformatf("channel %0d: %0d DRAM timing violations", c, violations[c]));
      check(n_act[c] == e_act[c], "ACT count matches the DRAM");
      check(e_fast[c] <= n_elig[c], "hits only for rows precharged within the caching duration");
      check(e_fast[c] > 0, $sformatf("channel %0d mechanism: ChargeCache hit", c));
      check(fast_acts[c] > 0, $sformatf("channel %0d mechanism: lowered tRCD used", c));
      check(e_ins[c] > 0, $sformatf("channel %0d mechanism: HCRAC insertion", c));
      check(e_prea[c] > 0, $sformatf("channel %0d mechanism: precharge-all", c));
      check(e_ref[c] > 0, $sformatf("channel %0d mechanism: refresh", c));
      check(e_stall[c] > 0, $sformatf("channel %0d mechanism: read stall", c));
      if (cycle > 2 * SWEEP) check(e_inv[c] > 0, $sformatf("channel %0d mechanism: invalidation sweep", c));
      $display("channel %0d: acts=%0d cc_hits=%0d (%0d%%) lowered_tRCD=%0d prea=%0d ref=%0d inserts=%0d sweeps=%0d stalls=%0d",
               c, e_act[c], e_fast[c], 100 * e_fast[c] / (e_act[c] > 0 ? e_act[c] : 1), fast_acts[c],
               e_prea[c], e_ref[c], e_ins[c], e_inv[c], e_stall[c]);
    end
    $display("cycles=%0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
