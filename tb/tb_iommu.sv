// tb_iommu: the IOMMU (unified TLB, pending-walk buffer, 16 walker threads,
// PWC, MSC) against the behavioural page-table memory. Random requests from
// 16 sources, with up to 48 in flight and random response back-pressure, are
// drawn from four test frames (whole-frame contiguous, the worked example,
// scattered with a hole, two contiguous halves). Every response is checked
// against the reference map. Midway a page inside a coalesced run is unmapped,
// the tables are rescanned and a shootdown is sent; later accesses must fault
// on that page and still translate its neighbours. At the end every
// statistics counter must be non-zero.
module tb_iommu;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready;
  vfn_t req_vfn; logic [3:0] req_src, rsp_src; xlate_rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; logic [PA_W-1:0] mem_req_addr;
  logic [3:0] mem_req_id, mem_rsp_id; pte_t mem_rsp_data;
  logic inv_valid, inv_all; vfn_t inv_vfn;
  iommu_stats_t stats;
  int checks = 0, failures = 0, issued = 0, done = 0, inflight = 0;
  int outstanding [vfn_t];

  iommu dut (.clk, .rst_n, .cr3_pfn(u_mem.cr3),
    .req_valid, .req_ready, .req_vfn, .req_src, .rsp_valid, .rsp_ready, .rsp, .rsp_src,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_id,
    .mem_rsp_valid, .mem_rsp_id, .mem_rsp_data, .inv_valid, .inv_vfn, .inv_all, .stats);
  pt_mem_model #(.ID_W(4)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_id(mem_req_id), .rsp_valid(mem_rsp_valid), .rsp_id(mem_rsp_id),
    .rsp_data(mem_rsp_data));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  function automatic vfn_t pick();
    int unsigned f = $urandom_range(0, 3), o = $urandom_range(0, 511);
    unique case (f)
      0: return vfn_t'(36'h80000 + o);
      1: return vfn_t'(36'h200 + o);
      2: return vfn_t'(36'h80400 + ($urandom_range(0, 3) == 0 ? 16 : o));
      default: return vfn_t'(36'h80600 + o);
    endcase
  endfunction

  // handshake bookkeeping and response checking (values before the edge)
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      issued++; inflight++;
      if (outstanding.exists(req_vfn)) outstanding[req_vfn]++; else outstanding[req_vfn] = 1;
    end
    if (rsp_valid && rsp_ready) begin
      done++; inflight--;
      chk(outstanding.exists(rsp.vfn) && outstanding[rsp.vfn] > 0, $sformatf("unexpected rsp %h", rsp.vfn));
      if (outstanding.exists(rsp.vfn)) outstanding[rsp.vfn]--;
      if (!u_mem.has_map(rsp.vfn)) chk(rsp.fault, $sformatf("%h should fault", rsp.vfn));
      else chk(!rsp.fault && rsp.pfn == u_mem.exp_pfn[rsp.vfn] && rsp.perm == u_mem.exp_perm[rsp.vfn],
               $sformatf("%h -> %h expected %h", rsp.vfn, rsp.pfn, u_mem.exp_pfn[rsp.vfn]));
    end
  end

  bit stop_issue = 0;
  always @(negedge clk) begin
    rsp_ready <= ($urandom_range(0, 9) != 0);
    if (!rst_n) req_valid <= 0;
    else if (!req_valid || req_ready) begin
      if (!stop_issue && inflight < 48 && $urandom_range(0, 3) != 0) begin
        req_valid <= 1; req_vfn <= pick(); req_src <= 4'($urandom_range(0, 15));
      end else req_valid <= 0;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog: issued %0d done %0d", issued, done); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic quiesce();
    stop_issue = 1;
    while (req_valid || inflight != 0) @(posedge clk);
    repeat (200) @(posedge clk);   // walkers finish their fills
  endtask

  initial begin
    inv_valid = 0; inv_all = 0; inv_vfn = 0; req_valid = 0; rsp_ready = 1;
    u_mem.build_scenario();
    repeat (3) @(posedge clk); rst_n = 1;
    // warm the example frame so that its S0-S3 run is cached
    wait (issued >= 1500);
    quiesce();
    // unmap a page in S2 of the example frame, rescan, shoot down
    u_mem.unmap_page(36'h2A8);
    u_mem.scan();
    @(negedge clk); inv_valid = 1; inv_vfn = 36'h2A8;
    @(negedge clk); inv_valid = 0;
    stop_issue = 0;
    wait (issued >= 3000);
    quiesce();
    chk(done == issued, "all requests answered");
    chk(stats.tlb_sub_hit > 0 && stats.tlb_reg_hit > 0 && stats.tlb_miss > 0, "tlb counters");
    chk(stats.walk_ac > 0 && stats.walk_regular > 0 && stats.walk_subreg > 0 && stats.walk_fault > 0, "walk modes");
    chk(stats.msc_hit > 0 && stats.msc_miss > 0 && stats.head_reads > 0, "msc counters");
    chk(stats.pwb_wait > 0, "pwb wait");
    $display("stats: sub_hit=%0d reg_hit=%0d miss=%0d ac=%0d reg=%0d sub=%0d fault=%0d msc_hit=%0d msc_miss=%0d heads=%0d pwb_wait=%0d",
      stats.tlb_sub_hit, stats.tlb_reg_hit, stats.tlb_miss, stats.walk_ac, stats.walk_regular,
      stats.walk_subreg, stats.walk_fault, stats.msc_hit, stats.msc_miss, stats.head_reads, stats.pwb_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
