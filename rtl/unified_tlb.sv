// unified_tlb: the IOMMU's shared TLB, extended for MESC.
//
// One set-associative array (default 32 sets x 16 ways = 512 entries) holds two
// kinds of entries, told apart by the type bit T:
//   T=0 regular entry  : tag VA[47:17] (31 bits), base PFN of one 4KB page,
//                        set index VA[16:12]; may live in any of the 16 ways.
//   T=1 subregion entry: tag = virtual subregion number VA[47:18] (30 bits),
//                        3-bit length (coalesced subregions minus one) and the
//                        base PFN the first subregion maps to; set index
//                        VA[25:21], so all subregions of one 2MB frame share a
//                        set; only the ways of partition 1 (the upper SUB_WAYS
//                        ways) may hold them (way partitioning).
// A subregion entry hits when VFN_lower = Tag<<6 <= VFN <= ((Tag+Len)<<6)|0x3F,
// and then PFN = base + (VFN - VFN_lower). These rules, widths and set indices
// are the paper's.
//
// Lookup timing (valid/ready): a request accepted in cycle t reads the
// subregion set in cycle t+1; on a hit the reply is offered in t+1. Otherwise
// the regular set is read in t+2 and the reply (hit or miss) is offered then.
// The reply is held until rsp_ready. This two-step order follows the paper's
// "subregion partition first, then regular entries"; one set read per cycle is
// this design's choice. A new request is taken only when no reply is pending.
//
// Fills take one cycle and are always accepted. An existing entry with the same
// type and tag is overwritten, else an invalid way is used, else a per-set
// round-robin victim (replacement policy is not given in the paper).
// Shootdown: inv_valid removes the regular entry of inv_vfn and every subregion
// entry whose range covers inv_vfn; inv_all clears the whole TLB.
// Lint note: Verilator reports SYNCASYNCNET on rst_n because the assertions
// below use it in 'disable iff', which it counts as a synchronous use; every
// flip-flop here resets asynchronously, so the warning stands.
module unified_tlb
  import mesc_pkg::*;
#(
  parameter int SETS     = 32,
  parameter int WAYS     = 16,
  parameter int SUB_WAYS = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  // lookup
  input  logic       req_valid,
  output logic       req_ready,
  input  vfn_t       req_vfn,
  output logic       rsp_valid,
  input  logic       rsp_ready,
  output logic       rsp_hit,
  output logic       rsp_sub,     // hit came from a subregion entry
  output vfn_t       rsp_vfn,
  output pfn_t       rsp_pfn,
  output perm_t      rsp_perm,
  // fill
  input  logic       fill_valid,
  input  tlb_fill_t  fill,
  // shootdown
  input  logic       inv_valid,
  input  vfn_t       inv_vfn,
  input  logic       inv_all
);
  localparam int SW  = $clog2(SETS);
  localparam int WW  = $clog2(WAYS);
  localparam int SBW = $clog2(SUB_WAYS);
  localparam int P1  = WAYS - SUB_WAYS;   // first way of partition 1

  tlb_entry_t mem [SETS][WAYS];
  logic [WAYS-1:0] vld [SETS];
  logic [WW-1:0]   rr_reg [SETS];
  logic [SBW-1:0]  rr_sub [SETS];

  typedef enum logic [1:0] {S_IDLE, S_SUB, S_REG, S_RSP} state_e;
  state_e state;
  vfn_t   vfn_q;
  logic   hit_q, sub_q;
  pfn_t   pfn_q;
  perm_t  perm_q;

  // ---------------- range test helpers ----------------
  function automatic logic sub_covers(tlb_entry_t e, vfn_t v);
    vfn_t lower, upper;
    lower = vfn_t'(e.tag[VSN_W-1:0]) << 6;
    upper = ((vfn_t'(e.tag[VSN_W-1:0]) + vfn_t'(e.len)) << 6) | vfn_t'(6'h3F);
    return e.t && (v >= lower) && (v <= upper);
  endfunction

  // ---------------- subregion lookup (cycle 1) ----------------
  logic [SW-1:0] sset, rset;
  assign sset = vfn_q[9 +: SW];    // VA[25:21]
  assign rset = vfn_q[0 +: SW];    // VA[16:12]

  logic  s_hit;  pfn_t s_pfn;  perm_t s_perm;
  always_comb begin
    s_hit = 1'b0; s_pfn = '0; s_perm = '0;
    for (int w = P1; w < WAYS; w++) begin
      if (!s_hit && vld[sset][w] && sub_covers(mem[sset][w], vfn_q)) begin
        s_hit  = 1'b1;
        s_pfn  = mem[sset][w].base + (vfn_q - (vfn_t'(mem[sset][w].tag[VSN_W-1:0]) << 6));
        s_perm = mem[sset][w].perm;
      end
    end
  end

  // ---------------- regular lookup (cycle 2) ----------------
  logic  r_hit;  pfn_t r_pfn;  perm_t r_perm;
  always_comb begin
    r_hit = 1'b0; r_pfn = '0; r_perm = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!r_hit && vld[rset][w] && !mem[rset][w].t &&
          mem[rset][w].tag == vfn_q[VFN_W-1:5]) begin
        r_hit  = 1'b1;
        r_pfn  = mem[rset][w].base;
        r_perm = mem[rset][w].perm;
      end
    end
  end

  assign req_ready = (state == S_IDLE);
  assign rsp_valid = (state == S_SUB && s_hit) || state == S_REG || state == S_RSP;
  always_comb begin
    rsp_vfn = vfn_q;
    unique case (state)
      S_SUB:   begin rsp_hit = s_hit; rsp_sub = 1'b1;  rsp_pfn = s_pfn; rsp_perm = s_perm; end
      S_REG:   begin rsp_hit = r_hit; rsp_sub = 1'b0;  rsp_pfn = r_pfn; rsp_perm = r_perm; end
      default: begin rsp_hit = hit_q; rsp_sub = sub_q; rsp_pfn = pfn_q; rsp_perm = perm_q; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vfn_q <= '0; hit_q <= 1'b0; sub_q <= 1'b0; pfn_q <= '0; perm_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin vfn_q <= req_vfn; state <= S_SUB; end
        S_SUB: begin
          if (s_hit) begin
            hit_q <= 1'b1; sub_q <= 1'b1; pfn_q <= s_pfn; perm_q <= s_perm;
            state <= rsp_ready ? S_IDLE : S_RSP;
          end else state <= S_REG;
        end
        S_REG: begin
          hit_q <= r_hit; sub_q <= 1'b0; pfn_q <= r_pfn; perm_q <= r_perm;
          state <= rsp_ready ? S_IDLE : S_RSP;
        end
        S_RSP: if (rsp_ready) state <= S_IDLE;
      endcase
    end
  end

  // ---------------- fill: way selection ----------------
  logic [SW-1:0] fset;
  logic [WW-1:0] fway;
  tlb_entry_t    fent;
  always_comb begin
    logic found, inv_found;
    logic [WW-1:0] inv_way;
    fent.t    = fill.t;
    fent.len  = fill.t ? fill.len : '0;
    fent.base = fill.base;
    fent.perm = fill.perm;
    if (fill.t) begin
      fset     = fill.vsn[3 +: SW];              // VSN[7:3] = VA[25:21]
      fent.tag = REG_TAG_W'(fill.vsn);
    end else begin
      fset     = fill.vfn[0 +: SW];              // VA[16:12]
      fent.tag = fill.vfn[VFN_W-1:5];
    end
    found = 1'b0; inv_found = 1'b0; fway = '0; inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (fill.t ? (w >= P1) : 1'b1) begin
        if (!found && vld[fset][w] && mem[fset][w].t == fill.t && mem[fset][w].tag == fent.tag) begin
          found = 1'b1; fway = WW'(w);
        end
        if (!inv_found && !vld[fset][w]) begin
          inv_found = 1'b1; inv_way = WW'(w);
        end
      end
    end
    if (!found) begin
      if (inv_found)   fway = inv_way;
      else if (fill.t) fway = WW'(P1) + WW'(rr_sub[fset]);
      else             fway = rr_reg[fset];
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) mem[fset][fway] <= fent;
  end

  // ---------------- valid bits, victims, shootdown ----------------
  logic [SW-1:0] iset_r, iset_s;
  assign iset_r = inv_vfn[0 +: SW];
  assign iset_s = inv_vfn[9 +: SW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld[s] <= '0; rr_reg[s] <= '0; rr_sub[s] <= '0;
      end
    end else begin
      if (inv_all) begin
        for (int s = 0; s < SETS; s++) vld[s] <= '0;
      end else if (inv_valid) begin
        for (int w = 0; w < WAYS; w++) begin
          if (!mem[iset_r][w].t && mem[iset_r][w].tag == inv_vfn[VFN_W-1:5])
            vld[iset_r][w] <= 1'b0;
          if (sub_covers(mem[iset_s][w], inv_vfn))
            vld[iset_s][w] <= 1'b0;
        end
      end
      if (fill_valid && !inv_all) begin
        vld[fset][fway] <= 1'b1;
        if (fill.t) rr_sub[fset] <= rr_sub[fset] + 1'b1;
        else        rr_reg[fset] <= rr_reg[fset] + 1'b1;
      end
    end
  end

  a_sub_partition: assert property (@(posedge clk) disable iff (!rst_n)
    fill_valid && fill.t |-> fway >= WW'(P1));
  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_pfn) && $stable(rsp_hit));
endmodule
