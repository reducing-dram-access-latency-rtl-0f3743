// tb_request_buffer: 8-entry buffer driven with random pushes and pops from
// random positions; a queue reference model checks that entries stay in
// arrival order, count and the valid mask, and that it refuses a push when full.
//
// Each cycle it may push (when push_ready) and may pop a random valid index;
// after every edge the entries/valid/count outputs are compared with a
// reference queue, checking that the buffer stays in arrival order (index 0
// oldest), which the FR-FCFS scheduler relies on. Depth 64 in the design, 8 here.
module tb_request_buffer;
  import cc_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push_valid = 0, push_ready, pop_en = 0;
  mem_req_t push_req = '0;
  logic [2:0] pop_idx = '0;
  mem_req_t entries [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [3:0] count;

  request_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  mem_req_t refq [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int full_seen = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int pi;
      @(negedge clk);
      push_valid = ($urandom_range(0, 99) < 55);
      push_req = '0;
      push_req.id = ID_W'(n); push_req.row = ROW_W'($urandom); push_req.we = 1'($urandom);
      pop_en = (refq.size() > 0) && ($urandom_range(0, 99) < 45);
      pi = pop_en ? $urandom_range(0, refq.size() - 1) : 0;
      pop_idx = 3'(pi);
      #1;
      check(push_ready == (refq.size() < DEPTH), "push_ready");
      if (!push_ready) full_seen++;
      if (pop_en) refq.delete(pi);
      if (push_valid && push_ready) refq.push_back(push_req);
      @(posedge clk); #1;
      push_valid = 0; pop_en = 0;
      check(int'(count) == refq.size(), "count");
      for (int i = 0; i < DEPTH; i++) begin
        check(valid[i] == (i < refq.size()), "valid mask");
        if (i < refq.size()) check(entries[i] == refq[i], $sformatf("entry %0d in age order", i));
      end
    end
    check(full_seen > 0, "buffer filled up at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
