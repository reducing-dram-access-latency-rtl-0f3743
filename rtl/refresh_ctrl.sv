// refresh_ctrl: periodic refresh request.
//
// Counts controller cycles; every TREFI cycles it raises ref_due, which stays
// high until the scheduler reports the REF command (ref_issued). While
// ref_due is high the scheduler stops opening rows, precharges every bank
// (PREA, whose closed rows ChargeCache inserts) and then issues REF.
//
// Follows the paper's description of refresh (REF command, refresh interval).
// This design's own choice: tREFI = 7.8 us = 6240 cycles (DDR3 below 85 C),
// all-bank refresh, no postponing of refreshes.
module refresh_ctrl
  import cc_pkg::*;
#(
  parameter int unsigned TREFI = cc_pkg::T_REFI,
  localparam int unsigned CW   = $clog2(TREFI + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ref_issued,
  output logic ref_due
);

  logic [CW-1:0] cnt_q;
  logic          tick;
  assign tick = (cnt_q == CW'(TREFI - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      ref_due <= 1'b0;
    end else begin
      cnt_q <= tick ? '0 : cnt_q + CW'(1);
      if (tick)            ref_due <= 1'b1;
      else if (ref_issued) ref_due <= 1'b0;
    end
  end

endmodule
