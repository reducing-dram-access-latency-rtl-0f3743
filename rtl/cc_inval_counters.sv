// cc_inval_counters: the Invalidation Interval Counter (IIC) and the Entry
// Counter (EC) that age entries out of the HCRAC.
//
// With k HCRAC entries and a caching duration of C cycles, IIC counts clock
// cycles from 0 and, when it reaches C/k, clears itself and raises inval_en
// for one cycle; inval_idx is then the EC value, and EC advances by one,
// wrapping from k-1 to 0. Every entry slot is therefore invalidated once every
// C cycles, so no valid entry can be older than the caching duration.
//
// Interface: inval_en is a one-cycle pulse every C/k cycles (the first one
// C/k cycles after reset); inval_idx is valid while inval_en is high. Both
// counters reset to zero, as the paper specifies.
//
// Follows the paper. This design's own choice: the counters run on the memory
// controller clock (the 800 MHz DRAM bus clock), so C is counted in those
// cycles: 1 ms = 800,000 cycles, C/k = 6250 for k = 128. A non-integer C/k is
// rounded down, which only invalidates slightly early (safe).
module cc_inval_counters
  import cc_pkg::*;
#(
  parameter int unsigned ENTRIES        = 128,
  parameter int unsigned CACHING_CYCLES = cc_pkg::CACHING_1MS,
  localparam int unsigned PERIOD        = CACHING_CYCLES / ENTRIES,
  localparam int unsigned IIC_W         = $clog2(PERIOD + 1),
  localparam int unsigned IDX_W         = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             inval_en,
  output logic [IDX_W-1:0] inval_idx
);

  logic [IIC_W-1:0] iic_q;
  logic [IDX_W-1:0] ec_q;

  // IIC reaches C/k on the cycle after it holds C/k-1.
  logic iic_expire;
  assign iic_expire = (iic_q == IIC_W'(PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iic_q <= '0;
      ec_q  <= '0;
    end else if (iic_expire) begin
      iic_q <= '0;
      ec_q  <= (ec_q == IDX_W'(ENTRIES - 1)) ? '0 : ec_q + IDX_W'(1);
    end else begin
      iic_q <= iic_q + IIC_W'(1);
    end
  end

  assign inval_en  = iic_expire;
  assign inval_idx = ec_q;

  initial begin
    assert (PERIOD >= 1) else $error("cc_inval_counters: CACHING_CYCLES < ENTRIES");
  end

endmodule
