// tb_chargecache: ChargeCache unit with 2 cores, 8-entry 2-way HCRACs and a
// caching duration of C = 800 cycles. Checks: a precharged row hits for the
// core that opened it and not for the other core; a precharge-all inserts the
// rows of all 8 banks, one per cycle (two rows per set, so nothing is
// evicted); entries are gone once a full sweep of C
// cycles has passed; the invalidation pulse comes every C/k = 100 cycles.
//
// Drives close_mask/close_row/close_core as the controller would on PRE and
// PREA, and lookup_en/lookup_core/lookup_addr as on an ACT. The insert, lookup
// and sweep rules are the paper's; per-core selection and one insertion per
// cycle are this design's choices and are checked as such.
module tb_chargecache;
  import cc_pkg::*;
  localparam int C = 800, K = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                             lookup_en = 0;
  logic [CORE_W-1:0]                lookup_core = '0;
  row_addr_t                        lookup_addr = '0;
  logic                             lookup_hit;
  logic [NUM_BANKS-1:0]             close_mask = '0;
  logic [NUM_BANKS-1:0][ROW_W-1:0]  close_row = '0;
  logic [NUM_BANKS-1:0][CORE_W-1:0] close_core = '0;
  logic                             insert_evt, inval_evt;

  chargecache #(.N_CORES(2), .ENTRIES(K), .WAYS(2), .CACHING_CYCLES(C)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic look(int core, int bank, int row, bit exp, string m);
    lookup_en = 1; lookup_core = CORE_W'(core);
    lookup_addr = '{bank: BANK_W'(bank), row: ROW_W'(row)}; #1;
    check(lookup_hit == exp, m);
    lookup_en = 0;
  endtask

  int n_ins = 0, n_inv = 0;
  always @(posedge clk) if (rst_n) begin
    if (insert_evt) n_ins++;
    if (inval_evt)  n_inv++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // wait until just after an invalidation, so a whole interval is free
    @(posedge clk iff inval_evt);
    @(negedge clk);
    // single PRE: bank 2, row 100, opened by core 1
    close_mask = 8'b0000_0100; close_row[2] = 16'd100; close_core[2] = 3'd1;
    @(negedge clk); close_mask = '0;
    look(1, 2, 100, 0, "not visible in the PRE cycle's next lookup before insertion");
    @(negedge clk);
    look(1, 2, 100, 1, "row hits for the core that opened it");
    look(0, 2, 100, 0, "row misses for another core");
    look(1, 3, 100, 0, "same row number, other bank misses");
    // precharge-all: 8 rows of core 0
    for (int b = 0; b < NUM_BANKS; b++) begin close_row[b] = ROW_W'(200 + 2 * b); close_core[b] = '0; end
    close_mask = '1;
    t0 = n_ins;
    @(negedge clk); close_mask = '0;
    repeat (NUM_BANKS) @(negedge clk);
    check(n_ins - t0 == NUM_BANKS, $sformatf("PREA inserts one row per bank (%0d)", n_ins - t0));
    for (int b = 0; b < NUM_BANKS; b++) look(0, b, 200 + 2 * b, 1, $sformatf("PREA row of bank %0d", b));
    // no more inserts: after one whole sweep everything is invalid
    t0 = n_inv;
    repeat (C + 2) @(negedge clk);
    check(n_inv - t0 == K || n_inv - t0 == K + 1, $sformatf("K invalidations per C cycles (%0d)", n_inv - t0));
    for (int b = 0; b < NUM_BANKS; b++) look(0, b, 200 + 2 * b, 0, "expired after caching duration");
    look(1, 2, 100, 0, "expired (core 1)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
