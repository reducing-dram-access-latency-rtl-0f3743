// request_buffer: the memory controller's request buffer.
//
// Holds up to DEPTH load/store requests from the last-level cache, kept in
// arrival order: entry 0 is the oldest and entries 0..count-1 are valid. The
// scheduler sees every entry at once (FR-FCFS needs all of them) and removes
// one entry per cycle, from any position, when that request's column command
// is issued; the younger entries shift down by one (a collapsing queue), so
// position always equals age rank.
//
// Interface: push is a valid/ready handshake (push_ready = not full);
// pop_en/pop_idx remove an entry at the clock edge. A push and a pop may
// happen in the same cycle. Outputs are registered state.
//
// Follows the paper: a 64-entry request buffer (Table 1). This design's own
// choice: reads and writes share one buffer, where the paper lists 64-entry
// read and write request queues.
module request_buffer
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned IDX_W = $clog2(DEPTH),
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push_valid,
  output logic                 push_ready,
  input  mem_req_t             push_req,
  input  logic                 pop_en,
  input  logic [IDX_W-1:0]     pop_idx,
  output mem_req_t             entries [DEPTH],
  output logic [DEPTH-1:0]     valid,
  output logic [CNT_W-1:0]     count
);

  mem_req_t         ent_q [DEPTH];
  logic [CNT_W-1:0] cnt_q;

  assign push_ready = (cnt_q != CNT_W'(DEPTH));

  mem_req_t         ent_d [DEPTH];
  logic [CNT_W-1:0] cnt_d;
  always_comb begin
    for (int unsigned i = 0; i < DEPTH; i++) ent_d[i] = ent_q[i];
    cnt_d = cnt_q;
    if (pop_en) begin
      for (int unsigned i = 0; i + 1 < DEPTH; i++)
        if (i >= pop_idx) ent_d[i] = ent_q[i + 1];
      cnt_d = cnt_q - CNT_W'(1);
    end
    if (push_valid && push_ready) begin
      ent_d[IDX_W'(cnt_d)] = push_req;
      cnt_d = cnt_d + CNT_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= cnt_d;
  end

  // entry payloads need no reset: they are only read below count
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < DEPTH; i++) ent_q[i] <= ent_d[i];
  end

  always_comb begin
    for (int unsigned i = 0; i < DEPTH; i++) begin
      entries[i] = ent_q[i];
      valid[i]   = (CNT_W'(i) < cnt_q);
    end
  end
  assign count = cnt_q;

  assert property (@(posedge clk) disable iff (!rst_n) pop_en |-> (CNT_W'(pop_idx) < cnt_q))
    else $error("request_buffer: pop of an empty slot");

endmodule
