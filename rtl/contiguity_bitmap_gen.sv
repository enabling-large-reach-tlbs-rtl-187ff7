// contiguity_bitmap_gen: builds the 7-bit contiguity bitmap of one 2MB large
// page frame that is stored in the memory subregion cache (MSC).
// Bit i is set when subregions S_i and S_(i+1) are both internally contiguous
// (their C_i and C_(i+1) bits in the L2PTE are set) and the head PFN of
// S_(i+1) is exactly 64 above the head PFN of S_i, i.e. the two subregions
// also continue each other physically. This follows the paper's rule; the
// heads of subregions whose C bit is clear are ignored.
// Purely combinational.
module contiguity_bitmap_gen
  import mesc_pkg::*;
(
  input  logic [NSUB-1:0] cbits,            // C7..C0 from the L2PTE
  input  pfn_t            head_pfn [NSUB],  // head L1PTE PFN of each subregion
  output logic [NSUB-2:0] bitmap
);
  always_comb begin
    for (int i = 0; i < NSUB-1; i++)
      bitmap[i] = cbits[i] && cbits[i+1] &&
                  (head_pfn[i+1] == head_pfn[i] + pfn_t'(SUB_PAGES));
  end
endmodule
