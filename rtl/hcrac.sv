// hcrac: Highly-Charged Row Address Cache.
//
// A tag-only, set-associative cache of DRAM row addresses (bank + row; the
// single rank needs no bits). It answers one question: "was this row
// precharged recently enough that its cells are still highly charged?"
//
//   insert     : a row address written when its bank is precharged. If the
//                address is already present it only becomes most recently used;
//                otherwise it fills an invalid way or replaces the LRU way.
//   lookup     : combinational hit test for the row of an ACT; a hit also marks
//                the way most recently used at the next clock edge.
//   invalidate : clears the valid bit of entry inval_idx ({set, way}), used by
//                the periodic IIC/EC sweep.
//
// Timing: lookup_hit is combinational from lookup_addr and the stored state;
// insert and invalidate take effect at the next rising clock edge. If insert
// and invalidate hit the same entry in one cycle the insert wins (the row was
// just precharged, so keeping it is safe).
//
// Follows the paper: 128 entries, 2-way, LRU, an entry of bank+row+valid. This
// design's own choices: the set index is the low row bits XORed with the bank
// number; LRU is kept as a per-way age rank (1 bit per entry for 2 ways, as the
// paper's storage formula counts); when a lookup and an insert touch the same
// set in one cycle, only the insert updates LRU.
module hcrac
  import cc_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned WAYS    = 2,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup (ACT)
  input  logic             lookup_en,
  input  row_addr_t        lookup_addr,
  output logic             lookup_hit,
  // insert (PRE)
  input  logic             insert_en,
  input  row_addr_t        insert_addr,
  // invalidate one entry (IIC/EC)
  input  logic             inval_en,
  input  logic [IDX_W-1:0] inval_idx
);

  typedef logic [WAY_W-1:0] age_t;
  typedef age_t [WAYS-1:0]  age_vec_t;

  logic      [WAYS-1:0] valid_q [SETS];
  row_addr_t            tag_q   [SETS][WAYS];
  age_vec_t             age_q   [SETS];

  function automatic logic [SET_W-1:0] set_of(row_addr_t a);
    if (SETS == 1) return '0;
    else return SET_W'(a.row) ^ SET_W'(a.bank);
  endfunction

  // Make way w the most recently used (age 0); younger ways age by one.
  function automatic age_vec_t touch(age_vec_t a, int unsigned w);
    age_vec_t r = a;
    for (int unsigned v = 0; v < WAYS; v++)
      if (a[v] < a[w]) r[v] = a[v] + age_t'(1);
    r[w] = '0;
    return r;
  endfunction

  // ---------------- lookup ----------------
  logic [SET_W-1:0] l_set;
  logic [WAY_W-1:0] l_way;
  always_comb begin
    l_set      = set_of(lookup_addr);
    lookup_hit = 1'b0;
    l_way      = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (valid_q[l_set][w] && tag_q[l_set][w] == lookup_addr) begin
        lookup_hit = lookup_en;
        l_way      = WAY_W'(w);
      end
  end

  // ---------------- insert: find match or victim ----------------
  logic [SET_W-1:0] i_set;
  logic [WAY_W-1:0] i_way;
  always_comb begin
    i_set     = set_of(insert_addr);
    i_way     = '0;
    // victim by default: the least recently used way
    for (int unsigned w = 0; w < WAYS; w++)
      if (age_q[i_set][w] == age_t'(WAYS - 1)) i_way = WAY_W'(w);
    // prefer an invalid way (lowest index)
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!valid_q[i_set][w]) begin
        i_way  = WAY_W'(w);
      end
    // an identical valid entry overrides both
    for (int unsigned w = 0; w < WAYS; w++)
      if (valid_q[i_set][w] && tag_q[i_set][w] == insert_addr) begin
        i_way     = WAY_W'(w);
      end
  end

  logic [SET_W-1:0] v_set;
  logic [WAY_W-1:0] v_way;
  always_comb begin
    v_set = (SETS > 1) ? SET_W'(inval_idx >> ((WAYS > 1) ? WAY_W : 0)) : '0;
    v_way = (WAYS > 1) ? WAY_W'(inval_idx) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        for (int unsigned w = 0; w < WAYS; w++) age_q[s][w] <= age_t'(w);
      end
    end else begin
      if (inval_en)
        valid_q[v_set][v_way] <= 1'b0;
      if (lookup_hit && !(insert_en && i_set == l_set))
        age_q[l_set] <= touch(age_q[l_set], int'(l_way));
      if (insert_en) begin
        valid_q[i_set][i_way] <= 1'b1;
        tag_q[i_set][i_way]   <= insert_addr;
        age_q[i_set]          <= touch(age_q[i_set], int'(i_way));
      end
    end
  end

  // Tags need no reset: every read of a tag is qualified by its valid bit.

  initial begin
    assert (ENTRIES % WAYS == 0 && (1 << $clog2(SETS)) == SETS)
      else $error("hcrac: ENTRIES/WAYS must be a power of two");
  end

endmodule
