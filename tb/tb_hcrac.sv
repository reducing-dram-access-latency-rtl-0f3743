// tb_hcrac: self-checking test of the HCRAC with 8 entries, 2 ways (4 sets).
// Directed part: miss before insert, hit after, LRU victim choice, refresh of
// an existing entry, invalidation by {set, way} index. Random part: 3000
// single operations (insert or lookup) compared against a list-based
// true-LRU reference model kept per set.
//
// Drives lookup/insert/invalidate directly and checks lookup_hit in the cycle
// of the lookup. The 2-way LRU organisation is the paper's; the reference
// model's set index (low row bits XOR bank) mirrors this design's own choice.
module tb_hcrac;
  import cc_pkg::*;

  localparam int ENTRIES = 8, WAYS = 2, SETS = ENTRIES / WAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      lookup_en = 0, insert_en = 0, inval_en = 0;
  row_addr_t lookup_addr = '0, insert_addr = '0;
  logic [2:0] inval_idx = '0;
  logic      lookup_hit;

  hcrac #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic row_addr_t ra(int bank, int row);
    return '{bank: BANK_W'(bank), row: ROW_W'(row)};
  endfunction
  // set index as the design computes it: low row bits XOR bank
  function automatic int set_of(row_addr_t a);
    return (int'(a.row) ^ int'(a.bank)) % SETS;
  endfunction

  task automatic ins(row_addr_t a);
    @(negedge clk); insert_en = 1; insert_addr = a;
    @(negedge clk); insert_en = 0;
  endtask
  task automatic look(row_addr_t a, bit exp, string m);
    @(negedge clk); lookup_en = 1; lookup_addr = a; #1;
    check(lookup_hit == exp, m);
    @(negedge clk); lookup_en = 0;
  endtask
  task automatic inval(int idx);
    @(negedge clk); inval_en = 1; inval_idx = 3'(idx);
    @(negedge clk); inval_en = 0;
  endtask

  // reference: per-set list, index 0 = most recently used
  row_addr_t refq [SETS][$];
  function automatic bit ref_has(row_addr_t a, output int pos);
    int s = set_of(a);
    for (int i = 0; i < refq[s].size(); i++) if (refq[s][i] == a) begin pos = i; return 1; end
    pos = -1; return 0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    row_addr_t A, B, C, D;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // A, B, C, D all map to set 1
    A = ra(0, 1); B = ra(0, 5); C = ra(1, 0); D = ra(2, 3);
    check(set_of(A) == 1 && set_of(B) == 1 && set_of(C) == 1 && set_of(D) == 1, "test setup");
    look(A, 0, "miss before insert");
    ins(A);
    look(A, 1, "hit after insert");
    look(B, 0, "other row misses");
    look(ra(1, 1), 0, "same row, other bank misses");
    ins(B);
    look(A, 1, "A still present with B");   // A becomes MRU
    look(B, 1, "B present");                // B becomes MRU
    look(A, 1, "A present");                // A MRU, B LRU
    ins(C);                                  // evicts B
    look(B, 0, "LRU way (B) evicted");
    look(A, 1, "MRU way (A) kept");
    look(C, 1, "C inserted");
    // A went to way 0 (first free), C replaced B in way 1
    inval(1 * 2 + 0);
    look(A, 0, "A invalidated by index {set1,way0}");
    look(C, 1, "C not affected by invalidation");
    ins(C);                                  // already present: no duplicate
    ins(D);                                  // must use the free way 0
    look(C, 1, "C kept after re-insert and D insert");
    look(D, 1, "D in freed way");
    // invalidate every slot
    for (int i = 0; i < ENTRIES; i++) inval(i);
    look(C, 0, "all invalidated (C)");
    look(D, 0, "all invalidated (D)");

    // random comparison against the reference LRU model
    for (int n = 0; n < 3000; n++) begin
      row_addr_t a;
      int pos;
      a = ra($urandom_range(0, 1), $urandom_range(0, 11));
      if ($urandom_range(0, 1)) begin
        int s;
        s = set_of(a);
        ins(a);
        if (ref_has(a, pos)) refq[s].delete(pos);
        else if (refq[s].size() == WAYS) void'(refq[s].pop_back());
        refq[s].push_front(a);
      end else begin
        bit exp;
        exp = ref_has(a, pos);
        look(a, exp, $sformatf("random lookup %0d", n));
        if (exp) begin refq[set_of(a)].delete(pos); refq[set_of(a)].push_front(a); end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
