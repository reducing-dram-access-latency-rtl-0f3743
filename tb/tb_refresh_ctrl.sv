// tb_refresh_ctrl: with tREFI = 50, ref_due rises every 50 cycles and stays
// high until ref_issued; the interval is measured from reset, not from REF.
//
// The k-th request is served k cycles after it rises (ref_issued pulsed for
// one cycle); the testbench checks that request k rises exactly k x TREFI
// cycles after reset, that ref_due stays high until served, and that it is
// low in the cycle after the REF. tREFI itself is this design's DDR3 value.
module tb_refresh_ctrl;
  localparam int TREFI = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ref_issued = 0, ref_due;

  refresh_ctrl #(.TREFI(TREFI)) dut (.*);

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cyc = 0;
    for (int k = 1; k <= 5; k++) begin
      while (!ref_due) begin @(negedge clk); cyc++; end
      check(cyc == k * TREFI, $sformatf("refresh %0d due at %0d", k, cyc));
      // hold for k cycles, then issue REF
      repeat (k) begin @(negedge clk); cyc++; check(ref_due, "due held until REF"); end
      ref_issued = 1;
      @(negedge clk); cyc++;
      ref_issued = 0;
      check(!ref_due, "cleared by REF");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
