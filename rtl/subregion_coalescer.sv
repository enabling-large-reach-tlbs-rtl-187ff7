// subregion_coalescer: turns an MSC contiguity bitmap into one subregion TLB
// entry for the requested address.
// Starting from the requested subregion s, it extends downwards while bitmap
// bit (lo-1) is set and upwards while bitmap bit hi is set, giving the run
// S_lo..S_hi of consecutive, mutually contiguous subregions. The entry's tag
// is the VSN of S_lo, its length field is hi-lo (0 = one subregion) and its
// base PFN is the PFN S_lo maps to, derived from the head PFN of S_s as
// head_pfn - 64*(s-lo) (valid because the run is contiguous). The paper gives
// the result (Fig. 9(c)); this search circuit is this design's own.
// Purely combinational.
module subregion_coalescer
  import mesc_pkg::*;
(
  input  logic [LPN_W-1:0] lpn,        // virtual large page frame, VA[47:21]
  input  logic [2:0]       sub,        // requested subregion index, VA[20:18]
  input  pfn_t             head_pfn,   // PFN of the requested subregion's head page
  input  logic [NSUB-2:0]  bitmap,
  output logic [VSN_W-1:0] vsn,        // base VSN of the coalesced run
  output logic [LEN_W-1:0] len,
  output pfn_t             base
);
  logic [2:0] lo, hi;
  always_comb begin
    logic go;
    lo = sub;
    go = 1'b1;
    for (int k = 1; k < NSUB; k++) begin
      if (go && int'(sub) - k >= 0 && bitmap[int'(sub) - k]) lo = 3'(int'(sub) - k);
      else go = 1'b0;
    end
    hi = sub;
    go = 1'b1;
    for (int k = 0; k < NSUB-1; k++) begin
      if (go && int'(sub) + k < NSUB-1 && bitmap[int'(sub) + k]) hi = 3'(int'(sub) + k + 1);
      else go = 1'b0;
    end
    vsn  = {lpn, lo};
    len  = hi - lo;
    base = head_pfn - (pfn_t'(3'(sub - lo)) << 6);
  end
endmodule
