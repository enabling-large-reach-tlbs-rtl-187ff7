// pt_mem_model: behavioural model of main memory holding an x86-64 style
// four-level page table, for simulation only (not synthesizable).
//
// It answers 64-bit reads on a valid/ready port with an id, LAT cycles after
// the request, one reply per cycle, in request order. Words never written read
// as zero (a non-present entry). Tasks build the page table:
//   map_page(vfn, pfn, perm)  creates the missing upper-level tables and the
//                             L1PTE (perm = {user, writable, no-execute});
//   scan()                    sets the MESC bits of every L2PTE following the
//                             page-table scanning algorithm of the OS: C_j is
//                             set when the 64 pages of subregion j are present,
//                             physically consecutive and equal in permission;
//                             AC is set when all subregions are and each
//                             continues the previous one.
// A reference map (exp_pfn/exp_perm, has_map) lets testbenches compute the
// expected translation independently of the design.
module pt_mem_model
  import mesc_pkg::*;
#(
  parameter int ID_W = 4,
  parameter int LAT  = 6
) (
  input  logic            clk,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [PA_W-1:0] req_addr,
  input  logic [ID_W-1:0] req_id,
  output logic            rsp_valid,
  output logic [ID_W-1:0] rsp_id,
  output pte_t            rsp_data
);
  pte_t  mem [logic [PA_W-1:0]];
  pfn_t  exp_pfn  [vfn_t];
  perm_t exp_perm [vfn_t];
  logic [PA_W-1:0] l2_entries [$];
  pfn_t  cr3 = pfn_t'(36'h0_0010_0000);
  pfn_t  next_table = pfn_t'(36'h0_0010_0001);
  int    reads = 0;

  typedef struct { longint due; logic [ID_W-1:0] id; logic [PA_W-1:0] addr; } pend_t;
  pend_t q [$];
  longint cyc = 0;

  assign req_ready = 1'b1;

  function automatic pte_t rd(logic [PA_W-1:0] a);
    return mem.exists(a) ? mem[a] : 64'd0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_id    <= q[0].id;
      rsp_data  <= rd(q[0].addr);
      void'(q.pop_front());
    end
    if (req_valid) begin
      pend_t p;
      p.due = cyc + LAT; p.id = req_id; p.addr = req_addr;
      q.push_back(p);
      reads++;
    end
  end

  initial begin rsp_valid = 1'b0; rsp_id = '0; rsp_data = '0; end

  function automatic logic [PA_W-1:0] ea(pfn_t t, logic [8:0] i);
    return {t, i, 3'b000};
  endfunction

  // next-level table behind entry address a, created when absent
  function automatic pfn_t table_at(logic [PA_W-1:0] a, bit is_l2);
    pte_t e = rd(a);
    if (!e[PTE_PRESENT]) begin
      e = '0;
      e[PTE_PFN_HI:PTE_PFN_LO] = next_table;
      e[PTE_PRESENT] = 1'b1; e[PTE_RW] = 1'b1; e[PTE_US] = 1'b1;
      next_table++;
      mem[a] = e;
      if (is_l2) l2_entries.push_back(a);
    end
    return pte_pfn(e);
  endfunction

  function automatic void map_page(vfn_t v, pfn_t p, perm_t perm);
    pfn_t t3, t2, t1;
    pte_t e = '0;
    t3 = table_at(ea(cr3, v[35:27]), 0);
    t2 = table_at(ea(t3, v[26:18]), 0);
    t1 = table_at(ea(t2, v[17:9]), 1);
    e[PTE_PFN_HI:PTE_PFN_LO] = p;
    e[PTE_PRESENT] = 1'b1;
    e[PTE_RW] = perm[1]; e[PTE_US] = perm[2]; e[PTE_NX] = perm[0];
    mem[ea(t1, v[8:0])] = e;
    exp_pfn[v] = p; exp_perm[v] = perm;
  endfunction

  function automatic void unmap_page(vfn_t v);
    pfn_t t3, t2, t1;
    t3 = table_at(ea(cr3, v[35:27]), 0);
    t2 = table_at(ea(t3, v[26:18]), 0);
    t1 = table_at(ea(t2, v[17:9]), 1);
    mem[ea(t1, v[8:0])] = '0;
    exp_pfn.delete(v); exp_perm.delete(v);
  endfunction

  function automatic bit has_map(vfn_t v);
    return exp_pfn.exists(v);
  endfunction

  // Test scenario used by the walker, IOMMU and system testbenches:
  //  frame 0x400 (VFN 0x80000-0x801FF): whole frame contiguous from PFN 0x6000A
  //  frame 0x001 (VFN 0x200-0x3FF): the worked example; S0-S3 from 0x00F87,
  //               S4 from 0x0201D, S5 and S6 scattered, S7 from 0x0205D
  //  frame 0x402: every page scattered, page 0x80410 left unmapped
  //  frame 0x403: all subregions contiguous, S0-S3 from 0x500000,
  //               S4-S7 from 0x510000 (so AC stays clear)
  //  frames 0x500-0x53F (VFN 0xA0000-0xA7FFF): every subregion contiguous on
  //               its own but no two adjacent, so each first walk reads 7 heads
  function automatic void build_scenario();
    for (int i = 0; i < 512; i++) map_page(vfn_t'(36'h80000 + i), pfn_t'(36'h6000A + i), 3'b010);
    for (int i = 0; i < 512; i++) begin
      pfn_t p;
      unique case (i / 64)
        0, 1, 2, 3: p = pfn_t'(36'h00F87 + i);
        4:          p = pfn_t'(36'h0201D + i - 256);
        7:          p = pfn_t'(36'h0205D + i - 448);
        default:    p = pfn_t'(36'h300000 + 3 * i);
      endcase
      map_page(vfn_t'(36'h200 + i), p, 3'b010);
    end
    for (int i = 0; i < 512; i++)
      if (i != 16) map_page(vfn_t'(36'h80400 + i), pfn_t'(36'h400000 + 5 * i), 3'b110);
    for (int i = 0; i < 512; i++)
      map_page(vfn_t'(36'h80600 + i), pfn_t'((i < 256 ? 36'h500000 : 36'h510000 - 256) + i), 3'b010);
    for (int f = 0; f < 64; f++)
      for (int i = 0; i < 512; i++)
        map_page(vfn_t'(36'hA0000 + 512 * f + i), pfn_t'(36'h800000 + 36'h1000 * f + 36'h100 * (i / 64) + (i % 64)), 3'b010);
    scan();
  endfunction

  // Page table scanning (sets C7..C0 and AC of every L2PTE)
  function automatic void scan();
    foreach (l2_entries[k]) begin
      pte_t l2 = rd(l2_entries[k]);
      pfn_t t1 = pte_pfn(l2);
      bit   all = 1;
      bit   cur [8];
      pte_t head [8];
      for (int j = 0; j < 8; j++) begin
        cur[j] = 1;
        head[j] = rd(ea(t1, 9'(j*64)));
        for (int i = 0; i < 64; i++) begin
          pte_t e = rd(ea(t1, 9'(j*64 + i)));
          if (!e[PTE_PRESENT] || pte_pfn(e) != pte_pfn(head[j]) + pfn_t'(i) ||
              pte_perm(e) != pte_perm(head[j])) cur[j] = 0;
        end
        l2[PTE_C_LO + j] = cur[j];
        if (!cur[j]) all = 0;
        if (j > 0 && !(cur[j-1] && pte_pfn(head[j]) == pte_pfn(head[j-1]) + 64 &&
                       pte_perm(head[j]) == pte_perm(head[j-1]))) all = 0;
      end
      l2[PTE_AC] = all;
      mem[l2_entries[k]] = l2;
    end
  endfunction
endmodule
