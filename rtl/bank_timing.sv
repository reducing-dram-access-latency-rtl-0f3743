// bank_timing: timing state of one DRAM bank, with ChargeCache's two sets of
// activation timings.
//
// Three down-counters hold the cycles left before each kind of command may be
// issued to the bank. A command issued in cycle t that imposes a delay of N
// cycles loads N-1 at the clock edge, so the next command may go in cycle t+N.
// A counter is only ever raised (max with its current value).
//   ACT      : col <- tRCD, pre <- tRAS   (default timings)
//              col <- tRCD-4, pre <- tRAS-8 when act_fast (ChargeCache hit)
//   RD       : pre <- tRTP
//   WR       : pre <- tCWL + tBL + tWR   (write recovery)
//   PRE/PREA : act <- tRP
//   REF      : act <- tRFC
// act_ok / col_ok / pre_ok are combinational from the counters.
//
// Follows the paper: tRCD 11 and tRAS 28 cycles with 4/8-cycle reductions on
// an HCRAC hit (Table 1, Sec. 4.3), tRCD -> RD/WR, tRAS -> PRE and tRP -> ACT
// (Fig. 7). This design's own choice: tRP and the read/write-to-precharge and
// refresh delays use standard DDR3-1600 numbers the paper does not give.
module bank_timing
  import cc_pkg::*;
#(
  parameter int unsigned TRCD     = cc_pkg::T_RCD,
  parameter int unsigned TRAS     = cc_pkg::T_RAS,
  parameter int unsigned TRCD_RED = cc_pkg::T_RCD_RED,
  parameter int unsigned TRAS_RED = cc_pkg::T_RAS_RED,
  parameter int unsigned TRP      = cc_pkg::T_RP,
  parameter int unsigned TRTP     = cc_pkg::T_RTP,
  parameter int unsigned TWRP     = cc_pkg::T_CWL + cc_pkg::T_BL + cc_pkg::T_WR,
  parameter int unsigned TRFC     = cc_pkg::T_RFC
) (
  input  logic clk,
  input  logic rst_n,
  input  cmd_e cmd,       // command issued this cycle
  input  logic sel,       // the command addresses this bank (PREA/REF: all)
  input  logic act_fast,  // with CMD_ACT: the row hit in ChargeCache
  output logic act_ok,
  output logic col_ok,
  output logic pre_ok
);

  localparam int unsigned CW = $clog2(TRFC + TRAS + 1);

  logic [CW-1:0] act_q, col_q, pre_q;

  function automatic logic [CW-1:0] dec(logic [CW-1:0] v);
    return (v != '0) ? v - CW'(1) : '0;
  endfunction

  // value to hold after a command with delay n, given the counter's current value
  function automatic logic [CW-1:0] raise(logic [CW-1:0] v, int unsigned n);
    logic [CW-1:0] nv = (n > 0) ? CW'(n - 1) : '0;
    logic [CW-1:0] dv = dec(v);
    return (nv > dv) ? nv : dv;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0;
      col_q <= '0;
      pre_q <= '0;
    end else begin
      act_q <= dec(act_q);
      col_q <= dec(col_q);
      pre_q <= dec(pre_q);
      if (sel) begin
        unique case (cmd)
          CMD_ACT: begin
            col_q <= raise(col_q, act_fast ? TRCD - TRCD_RED : TRCD);
            pre_q <= raise(pre_q, act_fast ? TRAS - TRAS_RED : TRAS);
          end
          CMD_RD:            pre_q <= raise(pre_q, TRTP);
          CMD_WR:            pre_q <= raise(pre_q, TWRP);
          CMD_PRE, CMD_PREA: act_q <= raise(act_q, TRP);
          CMD_REF:           act_q <= raise(act_q, TRFC);
          default: ;
        endcase
      end
    end
  end

  assign act_ok = (act_q == '0);
  assign col_ok = (col_q == '0);
  assign pre_ok = (pre_q == '0);

  assert property (@(posedge clk) disable iff (!rst_n) (sel && cmd == CMD_ACT) |-> act_ok)
    else $error("bank_timing: ACT before tRP/tRFC elapsed");
  assert property (@(posedge clk) disable iff (!rst_n) (sel && (cmd == CMD_RD || cmd == CMD_WR)) |-> col_ok)
    else $error("bank_timing: column command before tRCD elapsed");
  assert property (@(posedge clk) disable iff (!rst_n) (sel && cmd == CMD_PRE) |-> pre_ok)
    else $error("bank_timing: PRE before tRAS/tRTP/tWR elapsed");

  initial begin
    assert (TRCD > TRCD_RED && TRAS > TRAS_RED) else $error("bank_timing: reduction too large");
  end

endmodule
