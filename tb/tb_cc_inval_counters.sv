// tb_cc_inval_counters: checks the IIC/EC sweep with k = 8 entries and
// C = 80 cycles: one invalidation pulse exactly every C/k = 10 cycles, the
// first 10 cycles after reset, entry index 0,1,...,7,0,... so that every
// entry is invalidated exactly once per C cycles.
//
// Observes inval_en/inval_idx only (the block has no inputs besides clock and
// reset). The counting rule is the paper's; C and k are scaled down here.
module tb_cc_inval_counters;
  localparam int K = 8, C = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic       inval_en;
  logic [2:0] inval_idx;

  cc_inval_counters #(.ENTRIES(K), .CACHING_CYCLES(C)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
  end

  // monitor: count cycles since reset release, check each pulse
  int cycle = 0, pulses = 0, prev = 0;
  int per_entry [K];
  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (inval_en) begin
      check(cycle - prev == C / K - (pulses == 0 ? 1 : 0), $sformatf("pulse spacing %0d", cycle - prev));
      check(int'(inval_idx) == pulses % K, "EC order");
      per_entry[inval_idx]++;
      prev <= cycle;
      pulses <= pulses + 1;
    end
    if (pulses == 3 * K) begin
      for (int i = 0; i < K; i++) check(per_entry[i] == 3, "each entry once per C");
      check(cycle >= 3 * C - 1 && cycle <= 3 * C, $sformatf("3 sweeps take 3C cycles (%0d)", cycle));
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
