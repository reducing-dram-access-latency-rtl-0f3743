// tb_mem_controller: one channel controller against the DRAM model, at
// reduced sizes (2 cores, 16-entry request buffer, 8-entry response buffer,
// 16-entry HCRACs, caching duration 4000 cycles, tREFI 1500 cycles).
//
// 1. Directed latency check (open-row policy): read row 1, then row 2, then
//    row 1 again in bank 0. The first two ACTs miss in ChargeCache and their
//    RD follows 11 cycles later; the third ACT finds row 1 (precharged a few
//    cycles earlier) and its RD follows after the lowered tRCD of 7 cycles.
// 2. Writes to every line of a small region, then a random mix of reads of
//    that region (checked against the written data) and writes to a separate
//    region, with a randomly stalling response port, first under the
//    open-row and then under the closed-row policy.
// Every command is checked by the DRAM model (DDR3 rules and ChargeCache
// safety). The test counts, and requires at least once: ChargeCache hits,
// HCRAC insertions, invalidation sweeps, PREA, REF, read stalls on a full
// response buffer, and both row policies.
module tb_mem_controller;
  import cc_pkg::*;
  localparam int C = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic closed_row = 0;
  logic req_valid = 0, req_ready, resp_valid, resp_ready;
  mem_req_t req = '0;
  mem_resp_t resp;
  ddr3_pins_t ddr_pins;
  logic ddr_wvalid, ddr_rvalid;
  logic [DATA_W-1:0] ddr_wdata, ddr_rdata;
  ch_events_t events;
  int violations, fast_acts, n_act, n_ref, n_elig;

  mem_controller #(.N_CORES(2), .REQ_DEPTH(16), .RESP_DEPTH(8), .CC_ENTRIES(16),
                   .CACHING_CYCLES(C), .TREFI(1500)) dut (.*);
  ddr3_channel_model #(.CACHING_CYCLES(C)) dram (
    .clk, .rst_n, .pins(ddr_pins), .wvalid(ddr_wvalid), .wdata(ddr_wdata),
    .rvalid(ddr_rvalid), .rdata(ddr_rdata), .violations, .fast_acts, .n_act, .n_ref, .n_elig);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic logic [DATA_W-1:0] pattern(int seed);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(seed * 7919 + i * 104729);
    return d;
  endfunction

  // ---------------- event counters ----------------
  int e_act, e_fast, e_pre, e_prea, e_ref, e_rd, e_wr, e_ins, e_inv, e_stall;
  int cycle = 0;
  always @(posedge clk) if (rst_n) begin
    cycle++;
    e_act += int'(events.act); e_fast += int'(events.act_fast); e_pre += int'(events.pre);
    e_prea += int'(events.prea); e_ref += int'(events.refresh); e_rd += int'(events.rd);
    e_wr += int'(events.wr); e_ins += int'(events.cc_insert); e_inv += int'(events.cc_inval);
    e_stall += int'(events.rd_stall);
  end

  // ---------------- ACT -> first RD gaps seen on the pins, bank 0 ----------------
  int act_t = -1, gaps [$];
  always @(posedge clk) if (rst_n && !ddr_pins.cs_n && ddr_pins.ba == 0) begin
    if ({ddr_pins.ras_n, ddr_pins.cas_n, ddr_pins.we_n} == 3'b011) act_t = cycle;
    if ({ddr_pins.ras_n, ddr_pins.cas_n, ddr_pins.we_n} == 3'b101 && act_t >= 0) begin
      gaps.push_back(cycle - act_t); act_t = -1;
    end
  end

  // ---------------- responses ----------------
  logic [DATA_W-1:0] exp_data [int];
  int outstanding = 0, n_resp = 0;
  always @(posedge clk) if (rst_n) begin
    if (resp_valid && resp_ready) begin
      int key;
      key = {int'(resp.core), int'(resp.id)};
      n_resp++;
      outstanding--;
      check(exp_data.exists(key), "response to a read that was issued");
      if (exp_data.exists(key)) begin
        check(resp.data == exp_data[key], $sformatf("read data id %0d", resp.id));
        exp_data.delete(key);
      end
    end
  end

  // the LLC takes responses on 15% of the cycles while resp_random is set
  bit resp_random = 0;
  always @(negedge clk) resp_ready <= !resp_random || ($urandom_range(0, 99) < 15);

  task automatic send(bit we, int core, int id, int bank, int row, int col, logic [DATA_W-1:0] d);
    @(negedge clk);
    req_valid = 1; req.we = we; req.core = CORE_W'(core); req.id = ID_W'(id);
    req.bank = BANK_W'(bank); req.row = ROW_W'(row); req.col = COL_W'(col); req.wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req_valid = 0;
  endtask

  logic [DATA_W-1:0] shadow [int];
  function automatic int la(int bank, int row, int col);
    return bank * 65536 * 128 + row * 128 + col;
  endfunction
  function automatic logic [DATA_W-1:0] model_init(int bank, int row, int col);
    logic [DATA_W-1:0] d;
    logic [25:0] a;
    a = 26'({BANK_W'(bank), ROW_W'(row), COL_W'(col)});
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = {a, 6'(i)} ^ 32'h5a5a_0000;
    return d;
  endfunction
  task automatic read(int core, int id, int bank, int row, int col);
    exp_data[{core, id}] = shadow.exists(la(bank, row, col)) ? shadow[la(bank, row, col)]
                                                                : model_init(bank, row, col);
    outstanding++;
    send(0, core, id, bank, row, col, '0);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int id = 0;
    int prea_open, prea_closed, fast_open, fast_closed;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- 1. directed: row 1, row 2, row 1 in bank 0 ----
    read(0, id++, 0, 1, 0); repeat (60) @(negedge clk);
    read(0, id++, 0, 2, 0); repeat (60) @(negedge clk);
    read(0, id++, 0, 1, 3); repeat (60) @(negedge clk);
    check(gaps.size() == 3, $sformatf("three ACT->RD pairs (%0d)", gaps.size()));
    if (gaps.size() == 3) begin
      check(gaps[0] == T_RCD, $sformatf("ChargeCache miss: ACT->RD %0d cycles", gaps[0]));
      check(gaps[1] == T_RCD, $sformatf("ChargeCache miss: ACT->RD %0d cycles", gaps[1]));
      check(gaps[2] == T_RCD - T_RCD_RED, $sformatf("ChargeCache hit: ACT->RD %0d cycles", gaps[2]));
    end
    check(e_fast == 1 && fast_acts == 1, "exactly one ChargeCache hit so far");

    // ---- 2. fill a region: 4 banks x 6 rows x 4 lines ----
    for (int b = 0; b < 4; b++) for (int r = 0; r < 6; r++) for (int c = 0; c < 4; c++) begin
      logic [DATA_W-1:0] d;
      d = pattern(la(b, r, c));
      shadow[la(b, r, c)] = d;
      send(1, $urandom_range(0, 1), 0, b, r, c, d);
    end
    repeat (300) @(negedge clk);
    for (int phase = 0; phase < 2; phase++) begin
      closed_row = (phase == 1);
      prea_open = e_prea; fast_open = e_fast;
      resp_random = 1;
      for (int n = 0; n < 1500; n++) begin
        int b, r, c, core;
        b = $urandom_range(0, 3); r = $urandom_range(0, 5); c = $urandom_range(0, 3);
        core = $urandom_range(0, 1);
        if ($urandom_range(0, 99) < 75) begin
          read(core, id, b, r, c);
          id = (id + 1) % 256;
        end else begin
          send(1, core, 0, $urandom_range(4, 7), $urandom_range(0, 5), c, pattern(n));
        end
        if ($urandom_range(0, 99) < 10) repeat ($urandom_range(1, 40)) @(negedge clk);
      end
      resp_random = 0;
      repeat (500) @(negedge clk);
      if (phase == 0) begin prea_closed = e_prea - prea_open; fast_closed = e_fast - fast_open; end
      check(e_fast - fast_open > 0, $sformatf("ChargeCache hits under policy %0d", phase));
    end
    check(outstanding == 0 && exp_data.size() == 0, $sformatf("all reads answered (%0d left)", outstanding));
    check(violations == 0, $sformatf("DRAM model: %0d timing violations", violations));
    check(fast_acts > 0 && fast_acts <= e_fast, $sformatf("hits used lowered tRCD (%0d of %0d)", fast_acts, e_fast));
    check(e_fast <= n_elig, $sformatf("hits only for rows precharged within C (%0d of %0d)", e_fast, n_elig));
    check(n_act == e_act, "ACT count matches DRAM");
    check(e_fast > 0, "mechanism: ChargeCache hit");
    check(e_ins > 0,  "mechanism: HCRAC insertion");
    check(e_inv > 0,  "mechanism: invalidation sweep");
    check(e_prea > 0, "mechanism: precharge-all");
    check(e_ref > 0 && n_ref == e_ref, "mechanism: refresh");
    check(e_stall > 0, "mechanism: read stall on full response buffer");
    $display("acts=%0d cc_hits=%0d (%0d%%) pre=%0d prea=%0d ref=%0d rd=%0d wr=%0d inserts=%0d sweeps=%0d stalls=%0d cycles=%0d",
             e_act, e_fast, 100 * e_fast / (e_act > 0 ? e_act : 1), e_pre, e_prea, e_ref, e_rd, e_wr,
             e_ins, e_inv, e_stall, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
