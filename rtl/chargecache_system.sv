// chargecache_system: a two-channel DDR3 main-memory controller with
// ChargeCache, as seen from the last-level cache.
//
// A request carries a 64-byte line address. The address is split, from the
// least significant bit up, into channel, column (line within the 8 KB row),
// bank and row (row : bank : column : channel), so consecutive lines alternate
// between channels and then walk along one row. The request goes to its
// channel's mem_controller; req_ready is that channel's ready. Read responses
// of the channels are merged by a round-robin arbiter onto one response port.
// Each channel has its own DDR3 command/address pins and line-wide data
// signals, brought out as arrays (the PHY and DRAM modules are outside).
//
// Follows the paper: one memory controller per channel, each with its own
// ChargeCache holding 128 entries per core, 8 cores and 2 channels in the
// evaluated multi-core system. This design's own choices: the address
// mapping, the round-robin response merge, and one shared closed_row pin
// that selects the row policy of all channels.
module chargecache_system
  import cc_pkg::*;
#(
  parameter int unsigned N_CHANNELS     = 2,
  parameter int unsigned N_CORES        = 8,
  parameter int unsigned REQ_DEPTH      = 64,
  parameter int unsigned RESP_DEPTH     = 32,
  parameter int unsigned CC_ENTRIES     = 128,
  parameter int unsigned CC_WAYS        = 2,
  parameter int unsigned CACHING_CYCLES = cc_pkg::CACHING_1MS,
  parameter int unsigned TREFI          = cc_pkg::T_REFI,
  localparam int unsigned CH_W          = (N_CHANNELS > 1) ? $clog2(N_CHANNELS) : 0,
  localparam int unsigned ADDR_W        = CH_W + COL_W + BANK_W + ROW_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               closed_row,
  // requests from the last-level cache
  input  logic                               req_valid,
  output logic                               req_ready,
  input  logic                               req_we,
  input  logic [CORE_W-1:0]                  req_core,
  input  logic [ID_W-1:0]                    req_id,
  input  logic [ADDR_W-1:0]                  req_addr,   // cache-line address
  input  logic [DATA_W-1:0]                  req_wdata,
  // read responses to the last-level cache
  output logic                               resp_valid,
  input  logic                               resp_ready,
  output logic [CORE_W-1:0]                  resp_core,
  output logic [ID_W-1:0]                    resp_id,
  output logic [DATA_W-1:0]                  resp_rdata,
  // DRAM channels
  output ddr3_pins_t                         ddr_pins   [N_CHANNELS],
  output logic       [N_CHANNELS-1:0]        ddr_wvalid,
  output logic       [DATA_W-1:0]            ddr_wdata  [N_CHANNELS],
  input  logic       [N_CHANNELS-1:0]        ddr_rvalid,
  input  logic       [DATA_W-1:0]            ddr_rdata  [N_CHANNELS],
  // statistics
  output ch_events_t                         events     [N_CHANNELS]
);

  // ---------------- address decode ----------------
  localparam int unsigned CHI_W = (CH_W > 0) ? CH_W : 1;
  logic [CHI_W-1:0] req_ch;
  mem_req_t         dreq;
  always_comb begin
    req_ch     = (CH_W > 0) ? CHI_W'(req_addr) : '0;
    dreq.we    = req_we;
    dreq.core  = req_core;
    dreq.id    = req_id;
    dreq.col   = req_addr[CH_W +: COL_W];
    dreq.bank  = req_addr[CH_W + COL_W +: BANK_W];
    dreq.row   = req_addr[CH_W + COL_W + BANK_W +: ROW_W];
    dreq.wdata = req_wdata;
  end

  // ---------------- channels ----------------
  logic [N_CHANNELS-1:0] ch_ready, ch_rvalid, ch_rready;
  mem_resp_t             ch_resp [N_CHANNELS];

  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_ch
    mem_controller #(
      .N_CORES(N_CORES), .REQ_DEPTH(REQ_DEPTH), .RESP_DEPTH(RESP_DEPTH),
      .CC_ENTRIES(CC_ENTRIES), .CC_WAYS(CC_WAYS),
      .CACHING_CYCLES(CACHING_CYCLES), .TREFI(TREFI)
    ) u_mc (
      .clk, .rst_n, .closed_row,
      .req_valid (req_valid && req_ch == CHI_W'(c)),
      .req_ready (ch_ready[c]),
      .req       (dreq),
      .resp_valid(ch_rvalid[c]),
      .resp_ready(ch_rready[c]),
      .resp      (ch_resp[c]),
      .ddr_pins  (ddr_pins[c]),
      .ddr_wvalid(ddr_wvalid[c]),
      .ddr_wdata (ddr_wdata[c]),
      .ddr_rvalid(ddr_rvalid[c]),
      .ddr_rdata (ddr_rdata[c]),
      .events    (events[c])
    );
  end

  assign req_ready = ch_ready[req_ch];

  // ---------------- round-robin response merge ----------------
  logic [CHI_W-1:0] rr_q, grant;
  logic             any;
  always_comb begin
    any   = 1'b0;
    grant = '0;
    // first requester at or after rr_q, wrapping around
    for (int k = N_CHANNELS - 1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(rr_q) + k) % N_CHANNELS;
      if (ch_rvalid[c]) begin
        any   = 1'b1;
        grant = CHI_W'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       rr_q <= '0;
    else if (any && resp_ready)       rr_q <= (32'(grant) + 1 == N_CHANNELS) ? '0 : grant + CHI_W'(1);
  end

  always_comb begin
    ch_rready = '0;
    if (any) ch_rready[grant] = resp_ready;
  end
  assign resp_valid = any;
  assign resp_core  = ch_resp[grant].core;
  assign resp_id    = ch_resp[grant].id;
  assign resp_rdata = ch_resp[grant].data;

endmodule
