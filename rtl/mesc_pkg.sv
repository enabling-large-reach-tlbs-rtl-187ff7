// mesc_pkg: shared widths, page-table-entry fields and TLB entry types for the
// MESC (memory subregion coalescing) address translation path.
//
// A 48-bit virtual address is split into a 36-bit virtual frame number (VFN)
// and a 12-bit page offset. A 2MB virtual large page frame holds 8 subregions
// of 64 base pages; the virtual subregion number (VSN) is VA[47:18] (30 bits).
// The L2PTE (page directory entry) carries the MESC contiguity bits in bits the
// x86-64 format leaves unused: AC in bit 62 and C7..C0 in bits 61..54. The
// physical frame number sits in bits 47..12 (36 bits), as in the paper.
// The choice of flag bits (present, writable, user) follows x86-64 and is this
// design's own; the paper only calls them "Flags".
package mesc_pkg;

  localparam int VA_W      = 48;
  localparam int PA_W      = 48;
  localparam int OFF_W     = 12;
  localparam int VFN_W     = VA_W - OFF_W;   // 36
  localparam int PFN_W     = PA_W - OFF_W;   // 36
  localparam int VSN_W     = VA_W - 18;      // 30: VA[47:18]
  localparam int LPN_W     = VA_W - 21;      // 27: virtual large page frame, VA[47:21]
  localparam int NSUB      = 8;              // subregions per large page frame
  localparam int SUB_PAGES = 64;             // base pages per subregion
  localparam int LEN_W     = 3;              // subregion entry length field
  localparam int REG_TAG_W = VA_W - 17;      // 31: regular entry tag VA[47:17]
  localparam int PERM_W    = 3;              // {user, writable, no-execute}

  // PTE bit positions (Fig. 5(b))
  localparam int PTE_NX      = 63;
  localparam int PTE_AC      = 62;
  localparam int PTE_C_HI    = 61;           // C7
  localparam int PTE_C_LO    = 54;           // C0
  localparam int PTE_PFN_HI  = 47;
  localparam int PTE_PFN_LO  = 12;
  localparam int PTE_PRESENT = 0;
  localparam int PTE_RW      = 1;
  localparam int PTE_US      = 2;

  typedef logic [VA_W-1:0]  va_t;
  typedef logic [VFN_W-1:0] vfn_t;
  typedef logic [PFN_W-1:0] pfn_t;
  typedef logic [63:0]      pte_t;
  typedef logic [PERM_W-1:0] perm_t;

  function automatic pfn_t pte_pfn(pte_t p);
    return p[PTE_PFN_HI:PTE_PFN_LO];
  endfunction
  function automatic logic [NSUB-1:0] pte_cbits(pte_t p);
    return p[PTE_C_HI:PTE_C_LO];
  endfunction
  function automatic perm_t pte_perm(pte_t p);
    return {p[PTE_US], p[PTE_RW], p[PTE_NX]};
  endfunction

  // Unified TLB entry (valid bits are kept apart so they can be reset): T=0 regular (tag = VA[47:17]), T=1 subregion
  // (tag = VSN, len = number of coalesced subregions minus one).
  typedef struct packed {
    logic              t;
    logic [REG_TAG_W-1:0] tag;   // regular: VA[47:17]; subregion: {1'b0, VSN}
    logic [LEN_W-1:0]  len;
    pfn_t              base;
    perm_t             perm;
  } tlb_entry_t;

  // Fill request into the unified TLB
  typedef struct packed {
    logic              t;
    vfn_t              vfn;      // regular: the page's VFN
    logic [VSN_W-1:0]  vsn;      // subregion: base VSN
    logic [LEN_W-1:0]  len;
    pfn_t              base;
    perm_t             perm;
  } tlb_fill_t;

  // Translation reply returned to a requester
  typedef struct packed {
    vfn_t  vfn;
    pfn_t  pfn;
    perm_t perm;
    logic  fault;
  } xlate_rsp_t;

  // How a page table walk resolved the request (Fig. 6)
  typedef enum logic [1:0] {
    WALK_AC      = 2'd0,   // (a) contiguous large page frame
    WALK_REGULAR = 2'd1,   // (b) discontiguous subregion
    WALK_SUBREG  = 2'd2,   // (c) contiguous subregion
    WALK_FAULT   = 2'd3
  } walk_mode_e;

  // Event counters of the IOMMU (saturating at 2^32-1 is not needed in
  // practice; they wrap)
  typedef struct packed {
    logic [31:0] tlb_sub_hit;    // shared TLB hits on subregion entries
    logic [31:0] tlb_reg_hit;    // shared TLB hits on regular entries
    logic [31:0] tlb_miss;       // shared TLB misses (page walks)
    logic [31:0] walk_ac;        // walks in mode (a)
    logic [31:0] walk_regular;   // walks in mode (b)
    logic [31:0] walk_subreg;    // walks in mode (c)
    logic [31:0] walk_fault;     // walks ending on a non-present PTE
    logic [31:0] msc_hit;
    logic [31:0] msc_miss;
    logic [31:0] head_reads;     // neighbour head L1PTE reads
    logic [31:0] pwb_wait;       // cycles a request waited in the PWB with all PTWs busy
  } iommu_stats_t;

endpackage
