// cc_pkg: shared types and constants of the ChargeCache memory controller.
//
// The DRAM organisation is DDR3-1600 with 1 rank per channel, 8 banks per
// rank, 64K rows per bank and an 8 KB row buffer; a request moves one 64-byte
// cache line, so a row holds 128 lines. All timing values are in DRAM bus
// clock cycles at 800 MHz (1.25 ns). tRCD = 11 and tRAS = 28 and the ChargeCache
// reductions of 4 and 8 cycles are the paper's numbers. tRP, tCL, tCWL, tBL,
// tCCD, tRTP, tWR, tWTR, tRFC and tREFI are not given in the paper; they are
// standard DDR3-1600 (11-11-11, 4 Gb device) values chosen by this design.
package cc_pkg;

  // ---------------- DRAM organisation (per channel) ----------------
  localparam int unsigned NUM_BANKS = 8;          // banks per rank
  localparam int unsigned BANK_W    = 3;
  localparam int unsigned ROW_W     = 16;         // 64K rows per bank
  localparam int unsigned COL_W     = 7;          // 128 cache lines per 8 KB row
  localparam int unsigned DATA_W    = 512;        // one 64-byte cache line
  localparam int unsigned ID_W      = 8;          // request tag
  localparam int unsigned CORE_W    = 3;          // up to 8 requesting cores

  // ---------------- DDR3-1600 timing (cycles of 1.25 ns) ----------------
  localparam int unsigned T_RCD     = 11;         // ACT -> RD/WR
  localparam int unsigned T_RAS     = 28;         // ACT -> PRE
  localparam int unsigned T_RCD_RED = 4;          // ChargeCache reduction of tRCD
  localparam int unsigned T_RAS_RED = 8;          // ChargeCache reduction of tRAS
  localparam int unsigned T_RP      = 11;         // PRE -> ACT
  localparam int unsigned T_CL      = 11;         // RD -> first data
  localparam int unsigned T_CWL     = 8;          // WR -> first data
  localparam int unsigned T_BL      = 4;          // burst of 8 on a DDR bus
  localparam int unsigned T_CCD     = 4;          // column -> column
  localparam int unsigned T_RTP     = 6;          // RD -> PRE
  localparam int unsigned T_WR      = 12;         // end of write data -> PRE
  localparam int unsigned T_WTR     = 6;          // end of write data -> RD
  localparam int unsigned T_RFC     = 208;        // REF -> ACT (260 ns)
  localparam int unsigned T_REFI    = 6240;       // refresh interval (7.8 us)

  // 1 ms caching duration at the 800 MHz controller clock
  localparam int unsigned CACHING_1MS = 800_000;

  // ---------------- DRAM commands ----------------
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_PRE  = 3'd2,
    CMD_PREA = 3'd3,
    CMD_RD   = 3'd4,
    CMD_WR   = 3'd5,
    CMD_REF  = 3'd6
  } cmd_e;

  // Row address as the HCRAC stores it: rank (0 bits, one rank), bank, row.
  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
  } row_addr_t;

  // A request as it sits in the request buffer.
  typedef struct packed {
    logic              we;
    logic [CORE_W-1:0] core;
    logic [ID_W-1:0]   id;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  // Command chosen by the scheduler in one cycle.
  typedef struct packed {
    cmd_e              cmd;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } dram_cmd_t;

  // DDR3 command/address pins of one channel (active-low controls).
  typedef struct packed {
    logic              cke;
    logic              cs_n;
    logic              ras_n;
    logic              cas_n;
    logic              we_n;
    logic [BANK_W-1:0] ba;
    logic [15:0]       a;
  } ddr3_pins_t;

  // Read data returned to the last-level cache.
  typedef struct packed {
    logic [CORE_W-1:0] core;
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] data;
  } mem_resp_t;

  // Per-cycle event pulses of one channel (for statistics).
  typedef struct packed {
    logic act;          // an ACT was issued
    logic act_fast;     // ... and it hit in ChargeCache
    logic pre;          // single-bank PRE issued
    logic prea;         // precharge-all issued
    logic refresh;      // REF issued
    logic rd;           // RD issued
    logic wr;           // WR issued
    logic cc_insert;    // a row address was inserted into an HCRAC
    logic cc_inval;     // the IIC expired and one entry slot was invalidated
    logic rd_stall;     // a ready read was held back by a full response path
  } ch_events_t;

endpackage
