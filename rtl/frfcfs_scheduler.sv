// frfcfs_scheduler: request scheduling logic of one channel (FR-FCFS).
//
// Every cycle it chooses at most one DRAM command. Each buffered request is
// cracked by a command_generator into the command it needs next and whether
// that command is ready. Priorities, highest first:
//   1. refresh: while ref_due, no row is opened and no column command is
//      issued; once every open bank may be precharged a PREA closes them all,
//      and once every bank may be activated a REF is issued;
//   2. first-ready: the oldest request whose RD/WR is ready (a row hit);
//      a RD also needs room in the response path (rd_space), otherwise it is
//      held back and rd_stall is raised;
//   3. first-come-first-served: the oldest request whose ACT or PRE is ready.
//      A conflict PRE is not issued while any buffered request still hits the
//      row open in that bank;
//   4. closed-row policy only (closed_row = 1): precharge the lowest open bank
//      that has no buffered row hit left. With closed_row = 0 (open-row
//      policy) a row stays open until a conflicting request closes it.
// The choice is combinational; pop_en/pop_idx remove the request whose
// column command was chosen.
//
// Follows the paper: FR-FCFS, the open-row and closed-row policies as the
// paper defines them (open-row keeps a row open until another row is needed;
// closed-row closes it after all row hits in the buffer are served). This
// design's own choices: the rule against precharging a row that still has
// buffered hits, and the refresh sequence.
module frfcfs_scheduler
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  mem_req_t                        entries [DEPTH],
  input  logic [DEPTH-1:0]                valid,
  input  logic [NUM_BANKS-1:0]            bank_open,
  input  logic [NUM_BANKS-1:0][ROW_W-1:0] bank_row,
  input  logic [NUM_BANKS-1:0]            act_ok,
  input  logic [NUM_BANKS-1:0]            col_ok,
  input  logic [NUM_BANKS-1:0]            pre_ok,
  input  logic                            rd_ok,
  input  logic                            wr_ok,
  input  logic                            rd_space,
  input  logic                            ref_due,
  input  logic                            closed_row,
  output dram_cmd_t                       cmd,
  output logic [CORE_W-1:0]               cmd_core,
  output logic                            pop_en,
  output logic [IDX_W-1:0]                pop_idx,
  output logic                            rd_stall
);

  cmd_e       need  [DEPTH];
  logic [DEPTH-1:0] hit, rdy;

  for (genvar i = 0; i < DEPTH; i++) begin : g_gen
    command_generator u_gen (
      .req(entries[i]), .bank_open, .bank_row, .act_ok, .col_ok, .pre_ok,
      .rd_ok, .wr_ok, .need(need[i]), .row_hit(hit[i]), .ready(rdy[i])
    );
  end

  // banks whose open row is still wanted by some buffered request
  logic [NUM_BANKS-1:0] hit_pending;
  always_comb begin
    hit_pending = '0;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (valid[i] && hit[i]) hit_pending[entries[i].bank] = 1'b1;
  end

  logic             col_found, row_found, stall;
  logic [IDX_W-1:0] col_idx, row_idx;
  always_comb begin
    col_found = 1'b0; col_idx = '0;
    row_found = 1'b0; row_idx = '0;
    stall     = 1'b0;
    // scan youngest to oldest so the oldest match is kept
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (valid[i] && rdy[i]) begin
        unique case (need[i])
          CMD_RD: if (rd_space) begin col_found = 1'b1; col_idx = IDX_W'(i); end
                  else stall = 1'b1;
          CMD_WR: begin col_found = 1'b1; col_idx = IDX_W'(i); end
          CMD_ACT: begin row_found = 1'b1; row_idx = IDX_W'(i); end
          CMD_PRE: if (!hit_pending[entries[i].bank]) begin
                     row_found = 1'b1; row_idx = IDX_W'(i);
                   end
          default: ;
        endcase
      end
    end
  end

  // closed-row policy: an open bank nobody in the buffer wants any more
  logic              idle_found;
  logic [BANK_W-1:0] idle_bank;
  always_comb begin
    idle_found = 1'b0; idle_bank = '0;
    for (int b = NUM_BANKS - 1; b >= 0; b--)
      if (bank_open[b] && !hit_pending[b] && pre_ok[b]) begin
        idle_found = 1'b1; idle_bank = BANK_W'(b);
      end
  end

  // refresh: all open banks ready for PRE, all banks ready for ACT
  logic all_pre_ok, all_act_ok;
  assign all_pre_ok = ((bank_open & ~pre_ok) == '0);
  assign all_act_ok = (act_ok == '1);

  always_comb begin
    cmd      = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
    cmd_core = '0;
    pop_en   = 1'b0;
    pop_idx  = col_idx;
    rd_stall = stall && !ref_due;
    if (ref_due) begin
      if (bank_open != '0) begin
        if (all_pre_ok) cmd.cmd = CMD_PREA;
      end else if (all_act_ok) begin
        cmd.cmd = CMD_REF;
      end
    end else if (col_found) begin
      cmd      = '{cmd: need[col_idx], bank: entries[col_idx].bank,
                   row: entries[col_idx].row, col: entries[col_idx].col};
      cmd_core = entries[col_idx].core;
      pop_en   = 1'b1;
    end else if (row_found) begin
      cmd      = '{cmd: need[row_idx], bank: entries[row_idx].bank,
                   row: entries[row_idx].row, col: entries[row_idx].col};
      cmd_core = entries[row_idx].core;
    end else if (closed_row && idle_found) begin
      cmd.cmd  = CMD_PRE;
      cmd.bank = idle_bank;
    end
  end

endmodule
