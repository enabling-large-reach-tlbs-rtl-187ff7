// pwc: page walk cache of the IOMMU. It keeps recently used entries of the
// top three page-table levels (L4, L3 and L2 entries), so that a walk whose
// L2PTE is cached needs only the final L1PTE read from memory, and the MESC
// contiguity bits of the L2PTE come with it. The paper gives only its role
// and its size (8KB, i.e. 1024 eight-byte entries); the organisation here is
// this design's choice: 4-way set associative, the key is the level together
// with the virtual-address prefix that selects the entry (VA[47:39] for an L4
// entry, VA[47:30] for L3, VA[47:21] for L2), the set index is the low prefix
// bits XORed with the level, and replacement is true LRU.
//
// Lookup is combinational on lk_level/lk_prefix; lk_valid on a hit makes the
// entry most recently used at the clock edge. A fill (wr_valid) writes at the
// clock edge. inv_all empties the cache.
module pwc
  import mesc_pkg::*;
#(
  parameter int ENTRIES = 1024,
  parameter int WAYS    = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [1:0]       lk_level,     // 2 = L2PTE, 3 = L3PTE, 0 = L4PTE
  input  logic [LPN_W-1:0] lk_prefix,    // right-aligned VA prefix
  output logic             lk_hit,
  output pte_t             lk_pte,
  input  logic             wr_valid,
  input  logic [1:0]       wr_level,
  input  logic [LPN_W-1:0] wr_prefix,
  input  pte_t             wr_pte,
  input  logic             inv_all
);
  localparam int SETS = ENTRIES / WAYS;
  localparam int SW   = $clog2(SETS);
  localparam int WW   = $clog2(WAYS);
  localparam int KW   = 2 + LPN_W;

  logic [KW-1:0]   key [SETS][WAYS];
  pte_t            dat [SETS][WAYS];
  logic [WAYS-1:0] vld [SETS];
  logic [WW-1:0]   age [SETS][WAYS];

  function automatic logic [SW-1:0] idx(logic [1:0] lvl, logic [LPN_W-1:0] pfx);
    return pfx[SW-1:0] ^ (SW'(lvl) << (SW-2));
  endfunction

  logic [SW-1:0] lset, wset;
  logic [KW-1:0] lkey, wkey;
  assign lset = idx(lk_level, lk_prefix);
  assign wset = idx(wr_level, wr_prefix);
  assign lkey = {lk_level, lk_prefix};
  assign wkey = {wr_level, wr_prefix};

  logic [WW-1:0] lway;
  always_comb begin
    lk_hit = 1'b0; lk_pte = '0; lway = '0;
    for (int w = 0; w < WAYS; w++)
      if (!lk_hit && vld[lset][w] && key[lset][w] == lkey) begin
        lk_hit = 1'b1; lk_pte = dat[lset][w]; lway = WW'(w);
      end
  end

  logic [WW-1:0] wway;
  always_comb begin
    logic found;
    found = 1'b0; wway = '0;
    for (int w = 0; w < WAYS; w++)
      if (!found && vld[wset][w] && key[wset][w] == wkey) begin found = 1'b1; wway = WW'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && !vld[wset][w]) begin found = 1'b1; wway = WW'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && age[wset][w] == WW'(WAYS-1)) begin found = 1'b1; wway = WW'(w); end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      key[wset][wway] <= wkey;
      dat[wset][wway] <= wr_pte;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= WW'(w);
      end
    end else begin
      if (lk_valid && lk_hit && !(wr_valid && wset == lset)) begin
        for (int w = 0; w < WAYS; w++)
          if (age[lset][w] < age[lset][lway]) age[lset][w] <= age[lset][w] + 1'b1;
        age[lset][lway] <= '0;
      end
      if (wr_valid) begin
        vld[wset][wway] <= 1'b1;
        for (int w = 0; w < WAYS; w++)
          if (age[wset][w] < age[wset][wway]) age[wset][w] <= age[wset][w] + 1'b1;
        age[wset][wway] <= '0;
      end
      if (inv_all)
        for (int s = 0; s < SETS; s++) vld[s] <= '0;
    end
  end
endmodule
