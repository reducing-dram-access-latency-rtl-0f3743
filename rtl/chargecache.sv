// chargecache: the ChargeCache unit of one memory channel.
//
// It holds one HCRAC per core (the paper replicates ChargeCache per core and
// per channel) and one IIC/EC pair, and performs the three ChargeCache
// operations:
//   1. insert  - when banks are precharged (PRE to one bank, or PREA to all),
//                the memory controller reports which banks closed, with the
//                row that was open in each and the core whose request opened
//                it. These addresses are queued per bank and written into the
//                HCRAC of that core, one insertion per clock cycle.
//   2. lookup  - for an ACT about to be issued, lookup_hit says whether the
//                row is in the requesting core's HCRAC (combinational), so the
//                controller can use the lowered tRCD/tRAS for it.
//   3. invalidate - every C/k cycles the IIC/EC pair clears one entry slot in
//                every HCRAC.
//
// Timing: a closed row becomes visible to lookups 1 to NUM_BANKS cycles after
// the precharge. That is always before the row can be activated again, since
// an ACT to the same bank must wait tRP = 11 cycles after its precharge.
//
// Follows the paper: the insert/lookup/invalidate rules and the two counters.
// This design's own choices: an address is inserted into, and looked up in,
// the HCRAC of the core whose request activated the row; the IIC/EC pair is
// shared by all HCRACs of the channel (they have the same size, so they can
// share one sweep); a PREA's insertions are serialised through a per-bank
// pending register.
module chargecache
  import cc_pkg::*;
#(
  parameter int unsigned N_CORES        = 8,
  parameter int unsigned ENTRIES        = 128,
  parameter int unsigned WAYS           = 2,
  parameter int unsigned CACHING_CYCLES = cc_pkg::CACHING_1MS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // lookup for the ACT being issued
  input  logic                             lookup_en,
  input  logic [CORE_W-1:0]                lookup_core,
  input  row_addr_t                        lookup_addr,
  output logic                             lookup_hit,
  // banks closed by the precharge issued this cycle
  input  logic [NUM_BANKS-1:0]             close_mask,
  input  logic [NUM_BANKS-1:0][ROW_W-1:0]  close_row,
  input  logic [NUM_BANKS-1:0][CORE_W-1:0] close_core,
  // event pulses
  output logic                             insert_evt,
  output logic                             inval_evt
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  // ---------------- pending insertions, one per bank ----------------
  logic [NUM_BANKS-1:0]             pend_q;
  logic [NUM_BANKS-1:0][ROW_W-1:0]  pend_row_q;
  logic [NUM_BANKS-1:0][CORE_W-1:0] pend_core_q;

  logic                 ins_valid;
  logic [BANK_W-1:0]    ins_bank;
  always_comb begin
    ins_valid = 1'b0;
    ins_bank  = '0;
    for (int b = NUM_BANKS - 1; b >= 0; b--)
      if (pend_q[b]) begin
        ins_valid = 1'b1;
        ins_bank  = BANK_W'(b);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
    end else begin
      for (int unsigned b = 0; b < NUM_BANKS; b++) begin
        if (close_mask[b]) begin
          pend_q[b]      <= 1'b1;
          pend_row_q[b]  <= close_row[b];
          pend_core_q[b] <= close_core[b];
        end else if (ins_valid && ins_bank == BANK_W'(b)) begin
          pend_q[b] <= 1'b0;
        end
      end
    end
  end

  row_addr_t         ins_addr;
  logic [CORE_W-1:0] ins_core;
  assign ins_addr = '{bank: ins_bank, row: pend_row_q[ins_bank]};
  assign ins_core = pend_core_q[ins_bank];

  // ---------------- invalidation sweep ----------------
  logic             inv_en;
  logic [IDX_W-1:0] inv_idx;
  cc_inval_counters #(.ENTRIES(ENTRIES), .CACHING_CYCLES(CACHING_CYCLES)) u_counters (
    .clk, .rst_n, .inval_en(inv_en), .inval_idx(inv_idx)
  );

  // ---------------- per-core HCRACs ----------------
  logic [N_CORES-1:0] hit_c;
  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    hcrac #(.ENTRIES(ENTRIES), .WAYS(WAYS)) u_hcrac (
      .clk, .rst_n,
      .lookup_en  (lookup_en && lookup_core == CORE_W'(c)),
      .lookup_addr(lookup_addr),
      .lookup_hit (hit_c[c]),
      .insert_en  (ins_valid && ins_core == CORE_W'(c)),
      .insert_addr(ins_addr),
      .inval_en   (inv_en),
      .inval_idx  (inv_idx)
    );
  end

  assign lookup_hit = |hit_c;
  assign insert_evt = ins_valid;
  assign inval_evt  = inv_en;

  // A bank cannot be precharged again while its last row is still queued.
  assert property (@(posedge clk) disable iff (!rst_n) (close_mask & pend_q & ~(1 << ins_bank)) == '0)
    else $error("chargecache: precharge of a bank whose insertion is still pending");

endmodule
