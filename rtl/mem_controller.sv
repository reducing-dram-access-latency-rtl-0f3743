// mem_controller: one channel's DDR3 memory controller with ChargeCache.
//
// Requests from the last-level cache (one 64-byte line each, already decoded
// into bank/row/column) enter the request buffer. Each cycle the FR-FCFS
// scheduler picks at most one command from the per-bank row state and timing
// state. ChargeCache sits beside the command path:
//   - on a PRE or PREA, the rows being closed are inserted into the HCRAC of
//     the core that opened them;
//   - on an ACT, the row is looked up in the requesting core's HCRAC in the
//     same cycle; on a hit the bank's timing state is loaded with the lowered
//     tRCD/tRAS (7/20 instead of 11/28 cycles), on a miss with the defaults;
//   - the IIC/EC sweep invalidates one entry slot every C/k cycles.
//
// DRAM side: the chosen command is encoded onto the DDR3 pins and registered,
// so it appears on ddr_pins one cycle after the decision; a write's 64-byte
// line is presented on ddr_wdata with ddr_wvalid in the same cycle as its WR
// command. Read lines come back on ddr_rdata/ddr_rvalid in the order the RD
// commands were issued. The burst-level DDR data transfer (and its tCWL/tCL
// alignment) belongs to the PHY, which this design does not contain.
//
// Read responses go to the response buffer and leave through a valid/ready
// port; a RD is only issued if the response buffer can take its data. Writes
// get no response. Channel-level data-bus timing: RD->RD and WR->WR tCCD,
// RD->WR tCL+tCCD+2-tCWL, WR->RD tCWL+tBL+tWTR.
//
// Follows the paper: the request buffer / scheduler / command generator /
// response buffer structure, ChargeCache's insert, lookup and invalidate, the
// DDR3-1600 timings and 4/8-cycle reductions, open- and closed-row policies
// (closed_row pin). This design's own choices are listed in each sub-block.
module mem_controller
  import cc_pkg::*;
#(
  parameter int unsigned N_CORES        = 8,
  parameter int unsigned REQ_DEPTH      = 64,
  parameter int unsigned RESP_DEPTH     = 32,
  parameter int unsigned CC_ENTRIES     = 128,
  parameter int unsigned CC_WAYS        = 2,
  parameter int unsigned CACHING_CYCLES = cc_pkg::CACHING_1MS,
  parameter int unsigned TREFI          = cc_pkg::T_REFI
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        closed_row,    // 1: closed-row policy, 0: open-row policy
  // last-level cache side
  input  logic        req_valid,
  output logic        req_ready,
  input  mem_req_t    req,
  output logic        resp_valid,
  input  logic        resp_ready,
  output mem_resp_t   resp,
  // DRAM side
  output ddr3_pins_t  ddr_pins,
  output logic        ddr_wvalid,
  output logic [DATA_W-1:0] ddr_wdata,
  input  logic        ddr_rvalid,
  input  logic [DATA_W-1:0] ddr_rdata,
  // statistics
  output ch_events_t  events
);

  localparam int unsigned IDX_W   = $clog2(REQ_DEPTH);
  localparam int unsigned TAG_W   = CORE_W + ID_W;
  localparam int unsigned RCNT_W  = $clog2(RESP_DEPTH + 1);

  // ---------------- request buffer ----------------
  mem_req_t             entries [REQ_DEPTH];
  logic [REQ_DEPTH-1:0] valid;
  logic                 pop_en;
  logic [IDX_W-1:0]     pop_idx;

  request_buffer #(.DEPTH(REQ_DEPTH)) u_reqbuf (
    .clk, .rst_n,
    .push_valid(req_valid), .push_ready(req_ready), .push_req(req),
    .pop_en, .pop_idx, .entries, .valid, .count()
  );

  // ---------------- per-bank state ----------------
  dram_cmd_t                        cmd;
  logic [CORE_W-1:0]                cmd_core;
  logic [NUM_BANKS-1:0]             bank_open, close_mask;
  logic [NUM_BANKS-1:0][ROW_W-1:0]  bank_row;
  logic [NUM_BANKS-1:0][CORE_W-1:0] bank_core;
  logic [NUM_BANKS-1:0]             act_ok, col_ok, pre_ok;
  logic                             act_fast;

  bank_row_state u_rows (
    .clk, .rst_n, .cmd, .cmd_core,
    .open(bank_open), .open_row(bank_row), .open_core(bank_core), .close_mask
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    bank_timing u_timing (
      .clk, .rst_n,
      .cmd     (cmd.cmd),
      .sel     (cmd.bank == BANK_W'(b) || cmd.cmd == CMD_PREA || cmd.cmd == CMD_REF),
      .act_fast(act_fast),
      .act_ok  (act_ok[b]),
      .col_ok  (col_ok[b]),
      .pre_ok  (pre_ok[b])
    );
  end

  // ---------------- ChargeCache ----------------
  logic cc_insert, cc_inval;
  chargecache #(
    .N_CORES(N_CORES), .ENTRIES(CC_ENTRIES), .WAYS(CC_WAYS), .CACHING_CYCLES(CACHING_CYCLES)
  ) u_cc (
    .clk, .rst_n,
    .lookup_en  (cmd.cmd == CMD_ACT),
    .lookup_core(cmd_core),
    .lookup_addr('{bank: cmd.bank, row: cmd.row}),
    .lookup_hit (act_fast),
    .close_mask,
    .close_row  (bank_row),
    .close_core (bank_core),
    .insert_evt (cc_insert),
    .inval_evt  (cc_inval)
  );

  // ---------------- channel data-bus turnaround ----------------
  localparam int unsigned RD2RD = T_CCD;
  localparam int unsigned WR2WR = T_CCD;
  localparam int unsigned RD2WR = T_CL + T_CCD + 2 - T_CWL;
  localparam int unsigned WR2RD = T_CWL + T_BL + T_WTR;
  logic [4:0] rd_wait_q, wr_wait_q;
  logic       rd_ok, wr_ok;
  assign rd_ok = (rd_wait_q == '0);
  assign wr_ok = (wr_wait_q == '0);

  function automatic logic [4:0] hold(logic [4:0] v, int unsigned n);
    logic [4:0] dv = (v != '0) ? v - 5'd1 : '0;
    return (n > 0 && 5'(n - 1) > dv) ? 5'(n - 1) : dv;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_wait_q <= '0;
      wr_wait_q <= '0;
    end else if (cmd.cmd == CMD_RD) begin
      rd_wait_q <= hold(rd_wait_q, RD2RD);
      wr_wait_q <= hold(wr_wait_q, RD2WR);
    end else if (cmd.cmd == CMD_WR) begin
      rd_wait_q <= hold(rd_wait_q, WR2RD);
      wr_wait_q <= hold(wr_wait_q, WR2WR);
    end else begin
      rd_wait_q <= hold(rd_wait_q, 0);
      wr_wait_q <= hold(wr_wait_q, 0);
    end
  end

  // ---------------- refresh ----------------
  logic ref_due;
  refresh_ctrl #(.TREFI(TREFI)) u_refresh (
    .clk, .rst_n, .ref_issued(cmd.cmd == CMD_REF), .ref_due
  );

  // ---------------- read return path ----------------
  logic [TAG_W-1:0]  inflight_tag;
  logic [RCNT_W-1:0] inflight_cnt, resp_cnt;
  logic              rd_space, resp_empty, inflight_empty;

  assign rd_space = (32'(inflight_cnt) + 32'(resp_cnt)) < RESP_DEPTH;

  sync_fifo #(.WIDTH(TAG_W), .DEPTH(RESP_DEPTH)) u_inflight (
    .clk, .rst_n,
    .push (cmd.cmd == CMD_RD),
    .din  ({cmd_core, entries[pop_idx].id}),
    .full (),
    .pop  (ddr_rvalid),
    .dout (inflight_tag),
    .empty(inflight_empty),
    .count(inflight_cnt)
  );

  mem_resp_t resp_in;
  assign resp_in = '{core: inflight_tag[TAG_W-1 -: CORE_W], id: inflight_tag[ID_W-1:0], data: ddr_rdata};

  sync_fifo #(.WIDTH($bits(mem_resp_t)), .DEPTH(RESP_DEPTH)) u_respbuf (
    .clk, .rst_n,
    .push (ddr_rvalid),
    .din  (resp_in),
    .full (),
    .pop  (resp_valid && resp_ready),
    .dout (resp),
    .empty(resp_empty),
    .count(resp_cnt)
  );
  assign resp_valid = !resp_empty;

  // ---------------- scheduler ----------------
  logic rd_stall;
  frfcfs_scheduler #(.DEPTH(REQ_DEPTH)) u_sched (
    .entries, .valid, .bank_open, .bank_row, .act_ok, .col_ok, .pre_ok,
    .rd_ok, .wr_ok, .rd_space, .ref_due, .closed_row,
    .cmd, .cmd_core, .pop_en, .pop_idx, .rd_stall
  );

  // ---------------- DDR3 pins (registered) ----------------
  ddr3_pins_t pins_d;
  ddr3_cmd_encoder u_enc (.cmd, .pins(pins_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ddr_pins   <= '{cke: 1'b1, cs_n: 1'b0, ras_n: 1'b1, cas_n: 1'b1, we_n: 1'b1, ba: '0, a: '0};
      ddr_wvalid <= 1'b0;
    end else begin
      ddr_pins   <= pins_d;
      ddr_wvalid <= (cmd.cmd == CMD_WR);
    end
  end
  always_ff @(posedge clk) begin
    if (cmd.cmd == CMD_WR) ddr_wdata <= entries[pop_idx].wdata;
  end

  // ---------------- events ----------------
  always_comb begin
    events           = '0;
    events.act       = (cmd.cmd == CMD_ACT);
    events.act_fast  = (cmd.cmd == CMD_ACT) && act_fast;
    events.pre       = (cmd.cmd == CMD_PRE);
    events.prea      = (cmd.cmd == CMD_PREA);
    events.refresh   = (cmd.cmd == CMD_REF);
    events.rd        = (cmd.cmd == CMD_RD);
    events.wr        = (cmd.cmd == CMD_WR);
    events.cc_insert = cc_insert;
    events.cc_inval  = cc_inval;
    events.rd_stall  = rd_stall;
  end

  assert property (@(posedge clk) disable iff (!rst_n) ddr_rvalid |-> !inflight_empty)
    else $error("mem_controller: read data with no read in flight");

endmodule
