// iommu: the IOMMU of the GPU address translation path, with MESC support.
//
// Requests from the per-CU TLBs (VFN plus a source id) enter the unified
// shared TLB (unified_tlb). A hit is answered from the TLB. A miss is put
// into the page walk buffer (PWB), a FIFO that holds requests until one of
// the PTW_THREADS page-table-walker threads (ptw_thread) is free; the oldest
// waiting request is handed to the lowest-numbered idle thread. The threads
// share, through round-robin arbiters, the page-table memory port, the page
// walk cache (pwc), the memory subregion cache (msc), the TLB fill port and
// the reply port (which the TLB-hit path shares as well).
// The structure (shared TLB, PWB, highly-threaded PTW, PWC, plus the MSC)
// follows the paper; the arbitration, the FIFO PWB and its depth are this
// design's choices.
//
// Memory port: mem_req_valid/ready with a 48-bit physical address and the
// thread id; mem_rsp_valid returns the 64-bit entry with the same id, in any
// order, at most one outstanding read per thread.
// Reply port: rsp_valid/rsp_ready with the translation and the source id.
// Shootdown: inv_valid/inv_vfn removes affected shared-TLB entries and the MSC
// entry of that 2MB frame and empties the PWC (its L2 entries carry the C/AC
// bits, which a remap can change); inv_all empties the TLB, the MSC and the PWC.
// Lint note: Verilator reports SYNCASYNCNET on rst_n because the assertions
// below use it in 'disable iff', which it counts as a synchronous use; every
// flip-flop here resets asynchronously, so the warning stands.
module iommu
  import mesc_pkg::*;
#(
  parameter int SRC_W       = 4,
  parameter int PTW_THREADS = 16,
  parameter int PWB_DEPTH   = 16,
  parameter int TLB_SETS    = 32,
  parameter int TLB_WAYS    = 16,
  parameter int TLB_SUBWAYS = 8,
  parameter int MSC_ENTRIES = 512,
  parameter int PWC_ENTRIES = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pfn_t             cr3_pfn,
  // translation requests
  input  logic             req_valid,
  output logic             req_ready,
  input  vfn_t             req_vfn,
  input  logic [SRC_W-1:0] req_src,
  // translation replies
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output xlate_rsp_t       rsp,
  output logic [SRC_W-1:0] rsp_src,
  // page-table memory
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic [PA_W-1:0]  mem_req_addr,
  output logic [$clog2(PTW_THREADS)-1:0] mem_req_id,
  input  logic             mem_rsp_valid,
  input  logic [$clog2(PTW_THREADS)-1:0] mem_rsp_id,
  input  pte_t             mem_rsp_data,
  // shootdown
  input  logic             inv_valid,
  input  vfn_t             inv_vfn,
  input  logic             inv_all,
  // statistics
  output iommu_stats_t     stats
);
  localparam int T  = PTW_THREADS;
  localparam int TW = $clog2(T);

  // ---------------- shared TLB ----------------
  logic       tlb_rsp_valid, tlb_rsp_ready, tlb_hit, tlb_sub;
  vfn_t       tlb_vfn;
  pfn_t       tlb_pfn;
  perm_t      tlb_perm;
  logic       tlb_fill_valid;
  tlb_fill_t  tlb_fill;
  logic [SRC_W-1:0] src_q;

  unified_tlb #(.SETS(TLB_SETS), .WAYS(TLB_WAYS), .SUB_WAYS(TLB_SUBWAYS)) u_tlb (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_vfn,
    .rsp_valid(tlb_rsp_valid), .rsp_ready(tlb_rsp_ready), .rsp_hit(tlb_hit),
    .rsp_sub(tlb_sub), .rsp_vfn(tlb_vfn), .rsp_pfn(tlb_pfn), .rsp_perm(tlb_perm),
    .fill_valid(tlb_fill_valid), .fill(tlb_fill),
    .inv_valid, .inv_vfn, .inv_all);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) src_q <= '0;
    else if (req_valid && req_ready) src_q <= req_src;

  // ---------------- page walk buffer ----------------
  logic pwb_in_ready, pwb_out_valid, pwb_out_ready;
  logic [VFN_W+SRC_W-1:0] pwb_out;
  logic [$clog2(PWB_DEPTH):0] pwb_count;

  sync_fifo #(.WIDTH(VFN_W+SRC_W), .DEPTH(PWB_DEPTH)) u_pwb (
    .clk, .rst_n,
    .in_valid(tlb_rsp_valid && !tlb_hit), .in_ready(pwb_in_ready), .in_data({tlb_vfn, src_q}),
    .out_valid(pwb_out_valid), .out_ready(pwb_out_ready), .out_data(pwb_out),
    .count(pwb_count));

  // ---------------- PTW threads ----------------
  logic [T-1:0] t_start_ready, t_start;
  logic [T-1:0] t_pwc_req, t_pwc_we, t_mem_req, t_msc_req, t_msc_we, t_fill_req, t_rsp_req;
  logic [T-1:0] pwc_gnt, mem_gnt, msc_gnt, fill_gnt, t_rsp_gnt;
  logic [1:0]       t_pwc_level  [T];
  logic [LPN_W-1:0] t_pwc_prefix [T];
  pte_t             t_pwc_wdata  [T];
  logic [PA_W-1:0]  t_mem_addr   [T];
  logic [LPN_W-1:0] t_msc_lpn    [T];
  logic [NSUB-2:0]  t_msc_wbmp   [T];
  tlb_fill_t        t_fill       [T];
  xlate_rsp_t       t_rsp        [T];
  logic [SRC_W-1:0] t_rsp_src    [T];
  logic [T-1:0]     ev_mode, ev_msc_hit, ev_msc_miss, ev_head;
  walk_mode_e       ev_kind [T];

  logic             pwc_hit;  pte_t pwc_pte;
  logic             msc_hit;  logic [NSUB-2:0] msc_bmp;

  // dispatch: lowest idle thread takes the PWB head
  logic          any_idle;
  logic [TW-1:0] idle_idx;
  always_comb begin
    any_idle = 1'b0; idle_idx = '0;
    for (int i = 0; i < T; i++)
      if (!any_idle && t_start_ready[i]) begin any_idle = 1'b1; idle_idx = TW'(i); end
  end
  assign pwb_out_ready = any_idle;
  always_comb begin
    t_start = '0;
    if (pwb_out_valid && any_idle) t_start[idle_idx] = 1'b1;
  end

  for (genvar i = 0; i < T; i++) begin : g_ptw
    ptw_thread #(.SRC_W(SRC_W)) u_ptw (
      .clk, .rst_n, .cr3_pfn,
      .start_valid(t_start[i]), .start_ready(t_start_ready[i]),
      .start_vfn(pwb_out[SRC_W +: VFN_W]), .start_src(pwb_out[SRC_W-1:0]),
      .pwc_req(t_pwc_req[i]), .pwc_gnt(pwc_gnt[i]), .pwc_we(t_pwc_we[i]),
      .pwc_level(t_pwc_level[i]), .pwc_prefix(t_pwc_prefix[i]), .pwc_wdata(t_pwc_wdata[i]),
      .pwc_hit(pwc_hit), .pwc_pte(pwc_pte),
      .mem_req(t_mem_req[i]), .mem_gnt(mem_gnt[i]), .mem_addr(t_mem_addr[i]),
      .mem_rsp_valid(mem_rsp_valid && mem_rsp_id == TW'(i)), .mem_rsp_data(mem_rsp_data),
      .msc_req(t_msc_req[i]), .msc_gnt(msc_gnt[i]), .msc_we(t_msc_we[i]),
      .msc_lpn(t_msc_lpn[i]), .msc_wbitmap(t_msc_wbmp[i]),
      .msc_hit(msc_hit), .msc_bitmap(msc_bmp),
      .fill_req(t_fill_req[i]), .fill_gnt(fill_gnt[i]), .fill(t_fill[i]),
      .rsp_req(t_rsp_req[i]), .rsp_gnt(t_rsp_gnt[i]), .rsp(t_rsp[i]), .rsp_src(t_rsp_src[i]),
      .ev_mode(ev_mode[i]), .ev_mode_kind(ev_kind[i]),
      .ev_msc_hit(ev_msc_hit[i]), .ev_msc_miss(ev_msc_miss[i]), .ev_head_read(ev_head[i]));
  end

  // ---------------- arbiters ----------------
  logic [TW-1:0] pwc_idx, mem_idx, msc_idx, fill_idx;
  logic          pwc_any, mem_any, msc_any, fill_any;
  rr_arbiter #(.N(T)) u_arb_pwc  (.clk, .rst_n, .req(t_pwc_req),  .accept(1'b1),
                                  .gnt(pwc_gnt),  .gnt_idx(pwc_idx),  .any(pwc_any));
  rr_arbiter #(.N(T)) u_arb_msc  (.clk, .rst_n, .req(t_msc_req),  .accept(1'b1),
                                  .gnt(msc_gnt),  .gnt_idx(msc_idx),  .any(msc_any));
  rr_arbiter #(.N(T)) u_arb_fill (.clk, .rst_n, .req(t_fill_req), .accept(1'b1),
                                  .gnt(fill_gnt), .gnt_idx(fill_idx), .any(fill_any));
  logic [T-1:0] mem_sel;
  rr_arbiter #(.N(T)) u_arb_mem  (.clk, .rst_n, .req(t_mem_req),  .accept(mem_req_ready),
                                  .gnt(mem_sel),  .gnt_idx(mem_idx),  .any(mem_any));
  assign mem_gnt       = mem_req_ready ? mem_sel : '0;
  assign mem_req_valid = mem_any;
  assign mem_req_addr  = t_mem_addr[mem_idx];
  assign mem_req_id    = mem_idx;

  // reply port: T walker threads plus the TLB-hit path (index T)
  logic [T:0]  r_req, r_gnt;
  logic [TW:0] r_idx;
  logic        r_any;
  assign r_req = {tlb_rsp_valid && tlb_hit, t_rsp_req};
  rr_arbiter #(.N(T+1)) u_arb_rsp (.clk, .rst_n, .req(r_req), .accept(rsp_ready),
                                   .gnt(r_gnt), .gnt_idx(r_idx), .any(r_any));
  assign t_rsp_gnt = rsp_ready ? r_gnt[T-1:0] : '0;
  assign rsp_valid = r_any;
  always_comb begin
    if (r_gnt[T]) begin
      rsp     = '{vfn: tlb_vfn, pfn: tlb_pfn, perm: tlb_perm, fault: 1'b0};
      rsp_src = src_q;
    end else begin
      rsp     = t_rsp[r_idx[TW-1:0]];
      rsp_src = t_rsp_src[r_idx[TW-1:0]];
    end
  end
  assign tlb_rsp_ready = tlb_hit ? (r_gnt[T] && rsp_ready) : pwb_in_ready;

  // ---------------- PWC and MSC ----------------
  pwc #(.ENTRIES(PWC_ENTRIES)) u_pwc (
    .clk, .rst_n,
    .lk_valid(pwc_any && !t_pwc_we[pwc_idx]), .lk_level(t_pwc_level[pwc_idx]),
    .lk_prefix(t_pwc_prefix[pwc_idx]), .lk_hit(pwc_hit), .lk_pte(pwc_pte),
    .wr_valid(pwc_any && t_pwc_we[pwc_idx]), .wr_level(t_pwc_level[pwc_idx]),
    .wr_prefix(t_pwc_prefix[pwc_idx]), .wr_pte(t_pwc_wdata[pwc_idx]),
    .inv_all(inv_all || inv_valid));   // page-structure entries may be stale after any shootdown

  msc #(.ENTRIES(MSC_ENTRIES)) u_msc (
    .clk, .rst_n,
    .lk_valid(msc_any && !t_msc_we[msc_idx]), .lk_lpn(t_msc_lpn[msc_idx]),
    .lk_hit(msc_hit), .lk_bitmap(msc_bmp),
    .ins_valid(msc_any && t_msc_we[msc_idx]), .ins_lpn(t_msc_lpn[msc_idx]),
    .ins_bitmap(t_msc_wbmp[msc_idx]),
    .inv_valid, .inv_lpn(inv_vfn[VFN_W-1:9]), .inv_all);

  assign tlb_fill_valid = fill_any;
  assign tlb_fill       = t_fill[fill_idx];

  // ---------------- statistics ----------------
  logic [T-1:0] m_ac, m_reg, m_sub, m_flt;
  always_comb begin
    for (int i = 0; i < T; i++) begin
      m_ac[i]  = ev_mode[i] && ev_kind[i] == WALK_AC;
      m_reg[i] = ev_mode[i] && ev_kind[i] == WALK_REGULAR;
      m_sub[i] = ev_mode[i] && ev_kind[i] == WALK_SUBREG;
      m_flt[i] = ev_mode[i] && ev_kind[i] == WALK_FAULT;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats <= '0;
    else begin
      if (tlb_rsp_valid && tlb_rsp_ready) begin
        if (tlb_hit && tlb_sub)  stats.tlb_sub_hit <= stats.tlb_sub_hit + 1;
        if (tlb_hit && !tlb_sub) stats.tlb_reg_hit <= stats.tlb_reg_hit + 1;
        if (!tlb_hit)            stats.tlb_miss    <= stats.tlb_miss + 1;
      end
      // several walkers may report in the same cycle, so count them all
      stats.walk_ac      <= stats.walk_ac      + 32'($countones(m_ac));
      stats.walk_regular <= stats.walk_regular + 32'($countones(m_reg));
      stats.walk_subreg  <= stats.walk_subreg  + 32'($countones(m_sub));
      stats.walk_fault   <= stats.walk_fault   + 32'($countones(m_flt));
      stats.msc_hit      <= stats.msc_hit      + 32'($countones(ev_msc_hit));
      stats.msc_miss     <= stats.msc_miss     + 32'($countones(ev_msc_miss));
      stats.head_reads   <= stats.head_reads   + 32'($countones(ev_head));
      if (pwb_out_valid && !any_idle) stats.pwb_wait <= stats.pwb_wait + 1;
    end
  end

  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid);
endmodule
