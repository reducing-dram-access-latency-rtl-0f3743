// ddr3_channel_model: behavioural model of one DDR3-1600 channel (one rank,
// 8 banks) for simulation only; not synthesizable.
//
// It decodes the CS#/RAS#/CAS#/WE# pins, keeps the data of every line written
// (other lines read back as a fixed pattern of their address, see
// init_line), returns read data T_CL + T_BL cycles after a RD, and checks the
// command stream against the DDR3 rules: ACT only to a closed bank, RD/WR only
// to the open row, tRP, tRFC, tRTP, write recovery and the data-bus
// turnarounds.
//
// It also checks what ChargeCache is allowed to do. For every row it records
// when the row was last precharged. An ACT is "eligible" for lowered timings
// only if that row was precharged no more than CACHING_CYCLES (+ SLACK) cycles
// earlier; a RD/WR sooner than tRCD, or a PRE sooner than tRAS, after a
// non-eligible ACT is a violation. SLACK covers the controller's side: the
// command register delays a precharge on the pins by one cycle, and the rows
// closed by one PREA enter the cache one per cycle, up to 8 cycles later, so an
// entry may outlive its precharge by CACHING_CYCLES plus a few cycles. fast_acts counts ACTs whose first column
// command actually came before the standard tRCD; n_elig counts eligible ACTs.
module ddr3_channel_model
  import cc_pkg::*;
#(
  parameter int unsigned CACHING_CYCLES = cc_pkg::CACHING_1MS,
  parameter int unsigned SLACK          = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ddr3_pins_t        pins,
  input  logic              wvalid,
  input  logic [DATA_W-1:0] wdata,
  output logic              rvalid,
  output logic [DATA_W-1:0] rdata,
  output int                violations,
  output int                fast_acts,
  output int                n_act,
  output int                n_ref,
  output int                n_elig
);

  localparam int unsigned RLAT = T_CL + T_BL;

  function automatic logic [DATA_W-1:0] init_line(logic [BANK_W+ROW_W+COL_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = {a[25:0], 6'(i)} ^ 32'h5a5a_0000;
    return d;
  endfunction

  logic [DATA_W-1:0] mem [logic [BANK_W+ROW_W+COL_W-1:0]];
  longint            row_pre [logic [BANK_W+ROW_W-1:0]];

  longint now;
  logic   open   [NUM_BANKS];
  logic [ROW_W-1:0] orow [NUM_BANKS];
  longint t_act  [NUM_BANKS];
  longint t_pre  [NUM_BANKS];
  longint t_rd   [NUM_BANKS];
  longint t_wr   [NUM_BANKS];
  logic   elig   [NUM_BANKS];
  logic   first_col [NUM_BANKS];
  longint t_ref, t_lrd, t_lwr;

  // read return pipeline
  logic              rq_v [RLAT];
  logic [DATA_W-1:0] rq_d [RLAT];

  task automatic viol(string s);
    violations++;
    $display("DRAM MODEL VIOLATION @%0d: %s", now, s);
  endtask

  task automatic do_pre(int b);
    if (!open[b]) return;
    if (now - t_act[b] < (elig[b] ? T_RAS - T_RAS_RED : T_RAS)) viol($sformatf("tRAS bank %0d", b));
    if (now - t_rd[b] < T_RTP) viol("tRTP");
    if (now - t_wr[b] < T_CWL + T_BL + T_WR) viol("tWR");
    row_pre[{BANK_W'(b), orow[b]}] = now;
    open[b]  = 1'b0;
    t_pre[b] = now;
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      now = 0; n_elig = 0; violations = 0; fast_acts = 0; n_act = 0; n_ref = 0;
      t_ref = -100000; t_lrd = -100000; t_lwr = -100000;
      for (int b = 0; b < NUM_BANKS; b++) begin
        open[b] = 0; t_act[b] = -100000; t_pre[b] = -100000; t_rd[b] = -100000;
        t_wr[b] = -100000; elig[b] = 0; first_col[b] = 0;
      end
      for (int i = 0; i < RLAT; i++) rq_v[i] = 0;
      rvalid <= 1'b0;
    end else begin
      int b;
      logic [BANK_W+ROW_W+COL_W-1:0] la;
      now++;
      // read pipeline
      rvalid <= rq_v[RLAT-1];
      rdata  <= rq_d[RLAT-1];
      for (int i = RLAT - 1; i > 0; i--) begin rq_v[i] = rq_v[i-1]; rq_d[i] = rq_d[i-1]; end
      rq_v[0] = 1'b0;
      b = int'(pins.ba);
      if (pins.cke && !pins.cs_n) begin
        unique case ({pins.ras_n, pins.cas_n, pins.we_n})
          3'b011: begin // ACT
            logic [BANK_W+ROW_W-1:0] ra;
            n_act++;
            ra = {pins.ba, pins.a[ROW_W-1:0]};
            if (open[b]) viol("ACT to open bank");
            if (now - t_pre[b] < T_RP) viol("tRP");
            if (now - t_ref < T_RFC) viol("tRFC");
            elig[b] = row_pre.exists(ra) && (now - row_pre[ra] <= CACHING_CYCLES + SLACK);
            if (elig[b]) n_elig++;
            open[b] = 1'b1; orow[b] = pins.a[ROW_W-1:0]; t_act[b] = now; first_col[b] = 1'b1;
          end
          3'b101, 3'b100: begin // RD / WR
            logic is_rd;
            is_rd = pins.we_n;
            la = {pins.ba, orow[b], pins.a[9:3]};
            if (!open[b]) viol("column command to closed bank");
            if (now - t_act[b] < (elig[b] ? T_RCD - T_RCD_RED : T_RCD)) viol($sformatf("tRCD bank %0d", b));
            if (first_col[b] && now - t_act[b] < T_RCD) fast_acts++;
            first_col[b] = 1'b0;
            if (is_rd) begin
              if (now - t_lrd < T_CCD) viol("RD-RD");
              if (now - t_lwr < T_CWL + T_BL + T_WTR) viol("WR-RD");
              t_lrd = now; t_rd[b] = now;
              rq_v[0] = 1'b1;
              rq_d[0] = mem.exists(la) ? mem[la] : init_line(la);
            end else begin
              if (now - t_lwr < T_CCD) viol("WR-WR");
              if (now - t_lrd < T_CL + T_CCD + 2 - T_CWL) viol("RD-WR");
              if (!wvalid) viol("WR without write data");
              t_lwr = now; t_wr[b] = now;
              mem[la] = wdata;
            end
          end
          3'b010: begin // PRE / PREA
            if (pins.a[10]) for (int k = 0; k < NUM_BANKS; k++) do_pre(k);
            else do_pre(b);
          end
          3'b001: begin // REF
            n_ref++;
            for (int k = 0; k < NUM_BANKS; k++) begin
              if (open[k]) viol("REF with open bank");
              if (now - t_pre[k] < T_RP) viol("REF before tRP");
            end
            t_ref = now;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
