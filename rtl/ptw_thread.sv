// ptw_thread: one thread of the IOMMU's highly-threaded page table walker,
// with the MESC walk modes.
//
// A walk starts from a VFN that missed in the shared TLB. The thread first
// probes the page walk cache for the L2PTE, then the L3 and L4 entries, and
// reads from memory only the levels that were not cached (each upper-level
// entry it reads is written into the PWC). With the L2PTE in hand it decodes
// the MESC bits (Fig. 6 of the paper):
//   (a) AC set      : read L1PTE 0 of the frame; PFN = its PFN + VA[20:12];
//                     insert one subregion entry covering all 8 subregions.
//   (b) C_s clear   : read the L1PTE of the page; insert a regular entry.
//   (c) C_s set     : read the head L1PTE of subregion s; PFN = head PFN +
//                     VA[17:12]; reply at once; then look the frame up in the
//                     MSC. On a hit the stored bitmap is used; on a miss the
//                     head L1PTEs of all other subregions whose C bit is set are
//                     read one after another, the bitmap is built and inserted
//                     into the MSC. The coalesced run around s becomes one
//                     subregion TLB entry.
// The reply always precedes the TLB fill. A PTE without its present bit ends
// the walk with a fault reply and no fill.
//
// Shared resources (memory, PWC, MSC, TLB fill, reply port) are reached by a
// request/grant pair each; a grant completes the action in that cycle (for a
// PWC or MSC lookup the result is read in the granted cycle). Memory replies
// come back on mem_rsp_valid for this thread only; one read is outstanding at
// a time. The walk order, the three modes and the early reply follow the
// paper. Which heads are read on an MSC miss follows the MSC section of the
// paper ("the head L1PTEs of all other contiguous subregions"), not the
// narrower example of Fig. 6(c). The probing order of the PWC, the handshakes
// and the sequential head reads are this design's choices.
module ptw_thread
  import mesc_pkg::*;
#(
  parameter int SRC_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pfn_t             cr3_pfn,        // root of the page table
  // new walk
  input  logic             start_valid,
  output logic             start_ready,
  input  vfn_t             start_vfn,
  input  logic [SRC_W-1:0] start_src,
  // page walk cache
  output logic             pwc_req,
  input  logic             pwc_gnt,
  output logic             pwc_we,
  output logic [1:0]       pwc_level,
  output logic [LPN_W-1:0] pwc_prefix,
  output pte_t             pwc_wdata,
  input  logic             pwc_hit,
  input  pte_t             pwc_pte,
  // memory
  output logic             mem_req,
  input  logic             mem_gnt,
  output logic [PA_W-1:0]  mem_addr,
  input  logic             mem_rsp_valid,
  input  pte_t             mem_rsp_data,
  // memory subregion cache
  output logic             msc_req,
  input  logic             msc_gnt,
  output logic             msc_we,
  output logic [LPN_W-1:0] msc_lpn,
  output logic [NSUB-2:0]  msc_wbitmap,
  input  logic             msc_hit,
  input  logic [NSUB-2:0]  msc_bitmap,
  // TLB fill
  output logic             fill_req,
  input  logic             fill_gnt,
  output tlb_fill_t        fill,
  // reply
  output logic             rsp_req,
  input  logic             rsp_gnt,
  output xlate_rsp_t       rsp,
  output logic [SRC_W-1:0] rsp_src,
  // events for statistics (one-cycle pulses)
  output logic             ev_mode,        // walk mode became known
  output walk_mode_e       ev_mode_kind,
  output logic             ev_msc_hit,
  output logic             ev_msc_miss,
  output logic             ev_head_read
);
  typedef enum logic [3:0] {
    S_IDLE, S_PWC, S_MEM_REQ, S_MEM_WAIT, S_PWC_WR, S_REPLY, S_MSC,
    S_HEAD_NEXT, S_MSC_INS, S_FILL
  } state_e;

  state_e            state;
  vfn_t              vfn;
  logic [SRC_W-1:0]  src;
  logic [1:0]        lvl;          // level probed/read: 0=L4, 3=L3, 2=L2, 1=L1
  logic [PA_W-1:0]   addr;
  pte_t              l2pte;
  pte_t              mem_rsp_q;
  walk_mode_e        mode;
  logic              head_scan;    // current L1 read is a neighbour head read
  logic [2:0]        hj;           // neighbour subregion being read
  logic [NSUB-1:0]   done_mask;    // heads already known
  pfn_t              heads [NSUB];
  logic [NSUB-2:0]   bitmap;
  xlate_rsp_t        rsp_q;
  tlb_fill_t         fill_q;

  logic [LPN_W-1:0]  lpn;
  logic [2:0]        s;
  assign lpn = vfn[VFN_W-1:9];
  assign s   = vfn[8:6];

  function automatic logic [LPN_W-1:0] prefix_of(logic [1:0] l, vfn_t v);
    unique case (l)
      2'd2:    return v[VFN_W-1:9];                 // VA[47:21]
      2'd3:    return LPN_W'(v[VFN_W-1:18]);        // VA[47:30]
      default: return LPN_W'(v[VFN_W-1:27]);        // VA[47:39]
    endcase
  endfunction

  // physical address of entry i of the table held in frame t
  function automatic logic [PA_W-1:0] entry_addr(pfn_t t, logic [8:0] i);
    return {t, i, 3'b000};
  endfunction

  function automatic logic [PA_W-1:0] l1_addr(pte_t l2, vfn_t v);
    if (l2[PTE_AC])                  return entry_addr(pte_pfn(l2), 9'd0);
    else if (pte_cbits(l2)[v[8:6]])  return entry_addr(pte_pfn(l2), {v[8:6], 6'd0});
    else                             return entry_addr(pte_pfn(l2), v[8:0]);
  endfunction

  function automatic walk_mode_e mode_of(pte_t l2, vfn_t v);
    if (l2[PTE_AC])                  return WALK_AC;
    else if (pte_cbits(l2)[v[8:6]])  return WALK_SUBREG;
    else                             return WALK_REGULAR;
  endfunction

  // ---------------- bitmap generation and coalescing ----------------
  logic [NSUB-2:0]  gen_bitmap;
  logic [VSN_W-1:0] co_vsn;
  logic [LEN_W-1:0] co_len;
  pfn_t             co_base;
  logic [NSUB-1:0]  l2_cbits;
  assign l2_cbits = pte_cbits(l2pte);

  contiguity_bitmap_gen u_gen (
    .cbits(l2_cbits), .head_pfn(heads), .bitmap(gen_bitmap));

  subregion_coalescer u_coal (
    .lpn(lpn), .sub(s), .head_pfn(heads[s]), .bitmap(bitmap),
    .vsn(co_vsn), .len(co_len), .base(co_base));

  // next neighbour head to read: C bit set and not yet known
  logic       nxt_found;
  logic [2:0] nxt_j;
  always_comb begin
    nxt_found = 1'b0; nxt_j = '0;
    for (int j = 0; j < NSUB; j++)
      if (!nxt_found && l2_cbits[j] && !done_mask[j]) begin
        nxt_found = 1'b1; nxt_j = 3'(j);
      end
  end

  // ---------------- outputs ----------------
  assign start_ready = (state == S_IDLE);
  assign pwc_req     = (state == S_PWC) || (state == S_PWC_WR);
  assign pwc_we      = (state == S_PWC_WR);
  assign pwc_level   = lvl;
  assign pwc_prefix  = prefix_of(lvl, vfn);
  assign pwc_wdata   = mem_rsp_q;
  assign mem_req     = (state == S_MEM_REQ);
  assign mem_addr    = addr;
  assign msc_req     = (state == S_MSC) || (state == S_MSC_INS);
  assign msc_we      = (state == S_MSC_INS);
  assign msc_lpn     = lpn;
  assign msc_wbitmap = bitmap;
  assign fill_req    = (state == S_FILL);
  assign rsp_req     = (state == S_REPLY);
  assign rsp         = rsp_q;
  assign rsp_src     = src;
  always_comb begin
    fill = fill_q;
    if (mode == WALK_SUBREG) begin
      fill.vsn  = co_vsn;
      fill.len  = co_len;
      fill.base = co_base;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vfn <= '0; src <= '0; lvl <= 2'd2; addr <= '0; l2pte <= '0; mode <= WALK_REGULAR;
      head_scan <= 1'b0; hj <= '0; done_mask <= '0; bitmap <= '0;
      rsp_q <= '0; fill_q <= '0; mem_rsp_q <= '0;
      for (int j = 0; j < NSUB; j++) heads[j] <= '0;
      ev_mode <= 1'b0; ev_mode_kind <= WALK_REGULAR;
      ev_msc_hit <= 1'b0; ev_msc_miss <= 1'b0; ev_head_read <= 1'b0;
    end else begin
      ev_mode <= 1'b0; ev_msc_hit <= 1'b0; ev_msc_miss <= 1'b0; ev_head_read <= 1'b0;
      unique case (state)
        S_IDLE: if (start_valid) begin
          vfn <= start_vfn; src <= start_src; lvl <= 2'd2; head_scan <= 1'b0;
          done_mask <= '0; bitmap <= '0;
          state <= S_PWC;
        end
        // probe the PWC: L2 entry first, then L3, then L4
        S_PWC: if (pwc_gnt) begin
          if (pwc_hit) begin
            unique case (lvl)
              2'd2: begin
                l2pte <= pwc_pte; lvl <= 2'd1; addr <= l1_addr(pwc_pte, vfn);
                mode <= mode_of(pwc_pte, vfn);
                ev_mode <= 1'b1; ev_mode_kind <= mode_of(pwc_pte, vfn);
                state <= S_MEM_REQ;
              end
              2'd3:    begin lvl <= 2'd2; addr <= entry_addr(pte_pfn(pwc_pte), vfn[17:9]);  state <= S_MEM_REQ; end
              default: begin lvl <= 2'd3; addr <= entry_addr(pte_pfn(pwc_pte), vfn[26:18]); state <= S_MEM_REQ; end
            endcase
          end else begin
            unique case (lvl)
              2'd2:    lvl <= 2'd3;
              2'd3:    lvl <= 2'd0;
              default: begin addr <= entry_addr(cr3_pfn, vfn[35:27]); state <= S_MEM_REQ; end
            endcase
          end
        end
        S_MEM_REQ: if (mem_gnt) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_rsp_valid) begin
          mem_rsp_q <= mem_rsp_data;
          if (head_scan) begin
            heads[hj]     <= pte_pfn(mem_rsp_data);
            done_mask[hj] <= 1'b1;
            ev_head_read  <= 1'b1;
            state         <= S_HEAD_NEXT;
          end else if (!mem_rsp_data[PTE_PRESENT]) begin
            rsp_q <= '{vfn: vfn, pfn: '0, perm: '0, fault: 1'b1};
            ev_mode <= 1'b1; ev_mode_kind <= WALK_FAULT;   // counted even if the mode was known
            mode  <= WALK_FAULT;
            state <= S_REPLY;
          end else if (lvl == 2'd1) begin
            // final L1PTE: produce the translation and the fill
            rsp_q.vfn   <= vfn;
            rsp_q.perm  <= pte_perm(mem_rsp_data);
            rsp_q.fault <= 1'b0;
            fill_q.perm <= pte_perm(mem_rsp_data);
            fill_q.vfn  <= vfn;
            fill_q.base <= pte_pfn(mem_rsp_data);
            unique case (mode)
              WALK_AC: begin
                rsp_q.pfn  <= pte_pfn(mem_rsp_data) + pfn_t'(vfn[8:0]);
                fill_q.t   <= 1'b1;
                fill_q.vsn <= {lpn, 3'b000};
                fill_q.len <= 3'd7;
              end
              WALK_SUBREG: begin
                rsp_q.pfn    <= pte_pfn(mem_rsp_data) + pfn_t'(vfn[5:0]);
                heads[s]     <= pte_pfn(mem_rsp_data);
                done_mask[s] <= 1'b1;
                fill_q.t     <= 1'b1;
                fill_q.vsn   <= {lpn, s};
                fill_q.len   <= '0;
              end
              default: begin
                rsp_q.pfn  <= pte_pfn(mem_rsp_data);
                fill_q.t   <= 1'b0;
                fill_q.vsn <= '0;
                fill_q.len <= '0;
              end
            endcase
            state <= S_REPLY;
          end else begin
            state <= S_PWC_WR;     // cache this upper-level entry
          end
        end
        S_PWC_WR: if (pwc_gnt) begin
          unique case (lvl)
            2'd0: begin lvl <= 2'd3; addr <= entry_addr(pte_pfn(mem_rsp_q), vfn[26:18]); state <= S_MEM_REQ; end
            2'd3: begin lvl <= 2'd2; addr <= entry_addr(pte_pfn(mem_rsp_q), vfn[17:9]);  state <= S_MEM_REQ; end
            default: begin
              l2pte <= mem_rsp_q; lvl <= 2'd1; addr <= l1_addr(mem_rsp_q, vfn);
              mode <= mode_of(mem_rsp_q, vfn);
              ev_mode <= 1'b1; ev_mode_kind <= mode_of(mem_rsp_q, vfn);
              state <= S_MEM_REQ;
            end
          endcase
        end
        S_REPLY: if (rsp_gnt) begin
          if (mode == WALK_FAULT)       state <= S_IDLE;
          else if (mode == WALK_SUBREG) state <= S_MSC;
          else                          state <= S_FILL;
        end
        S_MSC: if (msc_gnt) begin
          if (msc_hit) begin
            bitmap <= msc_bitmap; ev_msc_hit <= 1'b1;
            state  <= S_FILL;
          end else begin
            ev_msc_miss <= 1'b1;
            state <= S_HEAD_NEXT;
          end
        end
        S_HEAD_NEXT: begin
          if (nxt_found) begin
            hj <= nxt_j; head_scan <= 1'b1; lvl <= 2'd1;
            addr <= entry_addr(pte_pfn(l2pte), {nxt_j, 6'd0});
            state <= S_MEM_REQ;
          end else begin
            head_scan <= 1'b0;
            bitmap <= gen_bitmap;
            state <= S_MSC_INS;
          end
        end
        S_MSC_INS: if (msc_gnt) state <= S_FILL;
        S_FILL:    if (fill_gnt) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end
endmodule
