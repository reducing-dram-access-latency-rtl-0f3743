// command_generator: cracks one buffered request into the next DRAM command
// it needs, given the state of its target bank.
//
//   bank open, same row     (row hit)      -> RD or WR
//   bank open, other row    (row conflict) -> PRE
//   bank closed                            -> ACT
// ready says the command may be issued this cycle: the bank's timing counter
// for it has expired, and for a column command the channel's data-bus
// turnaround also allows it (rd_ok / wr_ok). Purely combinational.
//
// Follows the paper's description of the command generator (Sec. 2.4). The
// channel-level read/write turnaround inputs are this design's addition.
module command_generator
  import cc_pkg::*;
(
  input  mem_req_t                        req,
  input  logic [NUM_BANKS-1:0]            bank_open,
  input  logic [NUM_BANKS-1:0][ROW_W-1:0] bank_row,
  input  logic [NUM_BANKS-1:0]            act_ok,
  input  logic [NUM_BANKS-1:0]            col_ok,
  input  logic [NUM_BANKS-1:0]            pre_ok,
  input  logic                            rd_ok,
  input  logic                            wr_ok,
  output cmd_e                            need,
  output logic                            row_hit,
  output logic                            ready
);

  always_comb begin
    row_hit = bank_open[req.bank] && bank_row[req.bank] == req.row;
    if (row_hit) begin
      need  = req.we ? CMD_WR : CMD_RD;
      ready = col_ok[req.bank] && (req.we ? wr_ok : rd_ok);
    end else if (bank_open[req.bank]) begin
      need  = CMD_PRE;
      ready = pre_ok[req.bank];
    end else begin
      need  = CMD_ACT;
      ready = act_ok[req.bank];
    end
  end

endmodule
