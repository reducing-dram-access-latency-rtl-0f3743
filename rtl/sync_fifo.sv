// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the memory controller's response buffer (read data waiting for the
// last-level cache) and as the in-order list of reads in flight on the DRAM
// data bus. DEPTH entries of WIDTH bits in a circular array; push when not
// full, pop when not empty, both allowed in the same cycle. dout shows the
// oldest entry (first-word fall-through); count is the number of entries.
//
// The paper names the response buffer; its depth and structure are this
// design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [CNT_W-1:0] count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_q, wr_q;
  logic [CNT_W-1:0] cnt_q;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + PTR_W'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q] <= din;
  end

  assign dout  = mem[rd_q];
  assign full  = (cnt_q == CNT_W'(DEPTH));
  assign empty = (cnt_q == '0);
  assign count = cnt_q;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");

endmodule
