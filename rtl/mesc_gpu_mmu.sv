// mesc_gpu_mmu: the GPU address translation path with MESC, as a whole.
//
// NUM_CU compute units each own a private fully-associative TLB (percu_tlb).
// Per-CU TLB misses are arbitrated round-robin onto the single request port of
// the IOMMU (iommu), which holds the MESC unified shared TLB, the page walk
// buffer, the multi-threaded page table walker with its page walk cache and
// the memory subregion cache. IOMMU replies carry the source CU number and are
// delivered to that CU's TLB. The page-table memory (reached in the real
// system through the memory controller) is outside: its read port is a port of
// this module. The CUs themselves are outside too: each has a request port
// (valid/ready, VFN) and a reply port (valid pulse, translation).
// A shootdown (inv_valid/inv_vfn or inv_all) is applied to every per-CU TLB and
// to the IOMMU at once. Default sizes follow the paper's evaluated system
// (16 CUs, 32-entry per-CU TLBs, 512-entry 16-way shared TLB, 16 walker
// threads, 8KB PWC, 512-entry MSC); the connections follow its Fig. 1.
// Lint note: Verilator reports SYNCASYNCNET on rst_n because assertions in
// the IOMMU, TLBs and arbiters use it in 'disable iff'; all flip-flops reset
// asynchronously, so the warning stands.
module mesc_gpu_mmu
  import mesc_pkg::*;
#(
  parameter int NUM_CU      = 16,
  parameter int L1_ENTRIES  = 32,
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
  // compute-unit translation ports
  input  logic [NUM_CU-1:0] cu_req_valid,
  output logic [NUM_CU-1:0] cu_req_ready,
  input  vfn_t             cu_req_vfn [NUM_CU],
  output logic [NUM_CU-1:0] cu_rsp_valid,
  output xlate_rsp_t       cu_rsp [NUM_CU],
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
  output logic [31:0]      l1_hits,
  output logic [31:0]      l1_misses,
  output iommu_stats_t     stats
);
  localparam int SRC_W = $clog2(NUM_CU > 1 ? NUM_CU : 2);

  logic [NUM_CU-1:0] miss_valid, miss_ready, fill_valid, ev_hit, ev_miss;
  vfn_t              miss_vfn [NUM_CU];

  logic             io_req_valid, io_req_ready, io_rsp_valid;
  vfn_t             io_req_vfn;
  logic [SRC_W-1:0] io_req_src, io_rsp_src;
  xlate_rsp_t       io_rsp;

  for (genvar c = 0; c < NUM_CU; c++) begin : g_cu
    percu_tlb #(.ENTRIES(L1_ENTRIES)) u_l1 (
      .clk, .rst_n,
      .cu_req_valid(cu_req_valid[c]), .cu_req_ready(cu_req_ready[c]), .cu_req_vfn(cu_req_vfn[c]),
      .cu_rsp_valid(cu_rsp_valid[c]), .cu_rsp(cu_rsp[c]),
      .miss_valid(miss_valid[c]), .miss_ready(miss_ready[c]), .miss_vfn(miss_vfn[c]),
      .fill_valid(fill_valid[c]), .fill_rsp(io_rsp),
      .inv_valid, .inv_vfn, .inv_all,
      .ev_hit(ev_hit[c]), .ev_miss(ev_miss[c]));
    assign fill_valid[c] = io_rsp_valid && io_rsp_src == SRC_W'(c);
  end

  logic [NUM_CU-1:0] gnt;
  logic              any;
  rr_arbiter #(.N(NUM_CU)) u_arb (
    .clk, .rst_n, .req(miss_valid), .accept(io_req_ready),
    .gnt(gnt), .gnt_idx(io_req_src), .any(any));
  assign io_req_valid = any;
  assign io_req_vfn   = miss_vfn[io_req_src];
  assign miss_ready   = io_req_ready ? gnt : '0;

  iommu #(.SRC_W(SRC_W), .PTW_THREADS(PTW_THREADS), .PWB_DEPTH(PWB_DEPTH),
          .TLB_SETS(TLB_SETS), .TLB_WAYS(TLB_WAYS), .TLB_SUBWAYS(TLB_SUBWAYS),
          .MSC_ENTRIES(MSC_ENTRIES), .PWC_ENTRIES(PWC_ENTRIES)) u_iommu (
    .clk, .rst_n, .cr3_pfn,
    .req_valid(io_req_valid), .req_ready(io_req_ready), .req_vfn(io_req_vfn), .req_src(io_req_src),
    .rsp_valid(io_rsp_valid), .rsp_ready(1'b1), .rsp(io_rsp), .rsp_src(io_rsp_src),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_id,
    .mem_rsp_valid, .mem_rsp_id, .mem_rsp_data,
    .inv_valid, .inv_vfn, .inv_all, .stats);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin l1_hits <= '0; l1_misses <= '0; end
    else begin
      l1_hits   <= l1_hits   + 32'($countones(ev_hit));
      l1_misses <= l1_misses + 32'($countones(ev_miss));
    end
  end
endmodule
