// msc: memory subregion cache. Each entry holds the 7-bit contiguity bitmap of
// one 2MB virtual large page frame (see contiguity_bitmap_gen), tagged by the
// frame number VA[47:21], with a valid bit and LRU state, as in the paper's
// entry format (Tag | Bitmap | Flags(V, LRU)). The paper evaluates 512 entries
// and calls the cache set-associative; the 4-way organisation, the index
// (low bits of the frame number) and true-LRU replacement are this design's
// choices.
//
// Lookup is combinational (lk_hit/lk_bitmap follow lk_lpn in the same cycle);
// when lk_valid is high on a hit the entry becomes most recently used at the
// clock edge. Insert (ins_valid) writes at the edge, replacing a matching
// entry, else an invalid way, else the least recently used way.
// inv_valid drops the entry of inv_lpn (used when the OS changes the mapping
// of a frame); inv_all clears the cache. Invalidate wins over insert.
module msc
  import mesc_pkg::*;
#(
  parameter int ENTRIES = 512,
  parameter int WAYS    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lk_valid,
  input  logic [LPN_W-1:0]  lk_lpn,
  output logic              lk_hit,
  output logic [NSUB-2:0]   lk_bitmap,
  input  logic              ins_valid,
  input  logic [LPN_W-1:0]  ins_lpn,
  input  logic [NSUB-2:0]   ins_bitmap,
  input  logic              inv_valid,
  input  logic [LPN_W-1:0]  inv_lpn,
  input  logic              inv_all
);
  localparam int SETS = ENTRIES / WAYS;
  localparam int SW   = $clog2(SETS);
  localparam int WW   = $clog2(WAYS);
  localparam int TW   = LPN_W - SW;

  logic [TW-1:0]   tag [SETS][WAYS];
  logic [NSUB-2:0] bmp [SETS][WAYS];
  logic [WAYS-1:0] vld [SETS];
  logic [WW-1:0]   age [SETS][WAYS];   // 0 = most recently used

  logic [SW-1:0] lset, iset, xset;
  assign lset = lk_lpn[SW-1:0];
  assign iset = ins_lpn[SW-1:0];
  assign xset = inv_lpn[SW-1:0];

  logic [WW-1:0] lway;
  always_comb begin
    lk_hit = 1'b0; lk_bitmap = '0; lway = '0;
    for (int w = 0; w < WAYS; w++)
      if (!lk_hit && vld[lset][w] && tag[lset][w] == lk_lpn[LPN_W-1:SW]) begin
        lk_hit = 1'b1; lk_bitmap = bmp[lset][w]; lway = WW'(w);
      end
  end

  logic [WW-1:0] iway;
  always_comb begin
    logic found;
    found = 1'b0; iway = '0;
    for (int w = 0; w < WAYS; w++)
      if (!found && vld[iset][w] && tag[iset][w] == ins_lpn[LPN_W-1:SW]) begin found = 1'b1; iway = WW'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && !vld[iset][w]) begin found = 1'b1; iway = WW'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && age[iset][w] == WW'(WAYS-1)) begin found = 1'b1; iway = WW'(w); end
  end

  always_ff @(posedge clk) begin
    if (ins_valid) begin
      tag[iset][iway] <= ins_lpn[LPN_W-1:SW];
      bmp[iset][iway] <= ins_bitmap;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= WW'(w);
      end
    end else begin
      if (lk_valid && lk_hit && !(ins_valid && iset == lset)) begin
        for (int w = 0; w < WAYS; w++)
          if (age[lset][w] < age[lset][lway]) age[lset][w] <= age[lset][w] + 1'b1;
        age[lset][lway] <= '0;
      end
      if (ins_valid) begin
        vld[iset][iway] <= 1'b1;
        for (int w = 0; w < WAYS; w++)
          if (age[iset][w] < age[iset][iway]) age[iset][w] <= age[iset][w] + 1'b1;
        age[iset][iway] <= '0;
      end
      if (inv_all) begin
        for (int s = 0; s < SETS; s++) vld[s] <= '0;
      end else if (inv_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (tag[xset][w] == inv_lpn[LPN_W-1:SW]) vld[xset][w] <= 1'b0;
      end
    end
  end
endmodule
