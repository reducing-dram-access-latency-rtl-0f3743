// tb_sync_fifo: 4-entry FIFO with random push/pop against a queue model;
// checks data order, count, full and empty.
//
// push/pop are driven at random, including pushes when full and pops when
// empty (both must be ignored); dout (first-word fall-through), empty, full and
// count are compared with the model after every edge.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push = 0, pop = 0, full, empty;
  logic [15:0] din = '0, dout;
  logic [2:0] count;

  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [15:0] q [$];
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int nfull = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(empty == (q.size() == 0) && full == (q.size() == 4) && int'(count) == q.size(), "flags/count");
      if (q.size() > 0) check(dout == q[0], "head data");
      if (full) nfull++;
      push = !full && ($urandom_range(0, 99) < 50);
      pop  = !empty && ($urandom_range(0, 99) < 45);
      din  = 16'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      @(posedge clk); #1; push = 0; pop = 0;
    end
    check(nfull > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
