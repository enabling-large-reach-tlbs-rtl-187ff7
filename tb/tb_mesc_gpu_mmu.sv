// tb_mesc_gpu_mmu: end-to-end test of the whole GPU MMU at its default,
// full-size configuration (16 compute units with 32-entry TLBs, 512-entry
// shared TLB, 16 walkers, 1024-entry PWC, 512-entry MSC) against the
// behavioural page-table memory. Each compute unit issues translation
// requests, one at a time, that favour its own test frame. Every reply is
// checked against the reference map. After a warm-up, one page inside a
// coalesced run is unmapped, the tables are rescanned and a shootdown is
// sent; that page must then fault. A final burst of requests to 64 frames of
// isolated contiguous subregions keeps every walker busy. The test fails if
// any mechanism was never exercised: per-CU hits and misses, shared-TLB subregion and regular hits and
// misses, the three walk modes and faults, MSC hits and misses, neighbour head
// reads, PWB waiting, and the shootdown.
module tb_mesc_gpu_mmu;
  import mesc_pkg::*;
  localparam int NCU = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCU-1:0] cu_req_valid, cu_req_ready, cu_rsp_valid;
  vfn_t cu_req_vfn [NCU];
  xlate_rsp_t cu_rsp [NCU];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; logic [PA_W-1:0] mem_req_addr;
  logic [3:0] mem_req_id, mem_rsp_id; pte_t mem_rsp_data;
  logic inv_valid, inv_all; vfn_t inv_vfn;
  logic [31:0] l1_hits, l1_misses;
  iommu_stats_t stats;
  int checks = 0, failures = 0, issued = 0, done = 0;
  int shootdowns = 0, stale_faults = 0;
  bit busy [NCU];
  vfn_t pend [NCU];

  mesc_gpu_mmu dut (.clk, .rst_n, .cr3_pfn(u_mem.cr3),
    .cu_req_valid, .cu_req_ready, .cu_req_vfn, .cu_rsp_valid, .cu_rsp,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_id,
    .mem_rsp_valid, .mem_rsp_id, .mem_rsp_data, .inv_valid, .inv_vfn, .inv_all,
    .l1_hits, .l1_misses, .stats);
  pt_mem_model #(.ID_W(4)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_id(mem_req_id), .rsp_valid(mem_rsp_valid), .rsp_id(mem_rsp_id),
    .rsp_data(mem_rsp_data));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  // compute unit c prefers frame c%4 and a small window inside it
  bit burst = 0;
  function automatic vfn_t pick(int c);
    int unsigned f = ($urandom_range(0, 4) == 0) ? $urandom_range(0, 3) : c % 4;
    int unsigned o = $urandom_range(0, 511);
    if (burst) return vfn_t'(36'hA0000 + $urandom_range(0, 64 * 512 - 1));
    unique case (f)
      0: return vfn_t'(36'h80000 + o);
      1: return vfn_t'(($urandom_range(0, 9) == 0) ? 36'h2A8 : 36'h200 + o);
      2: return vfn_t'(36'h80400 + ($urandom_range(0, 5) == 0 ? 16 : o));
      default: return vfn_t'(36'h80600 + o);
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCU; c++) begin
      if (cu_req_valid[c] && cu_req_ready[c]) begin busy[c] = 1; pend[c] = cu_req_vfn[c]; issued++; end
      if (cu_rsp_valid[c]) begin
        done++;
        chk(busy[c] && cu_rsp[c].vfn == pend[c], $sformatf("cu%0d reply for %h, wanted %h", c, cu_rsp[c].vfn, pend[c]));
        busy[c] = 0;
        if (!u_mem.has_map(pend[c])) begin
          chk(cu_rsp[c].fault, $sformatf("%h should fault", pend[c]));
          if (pend[c] == 36'h2A8) stale_faults++;
        end else
          chk(!cu_rsp[c].fault && cu_rsp[c].pfn == u_mem.exp_pfn[pend[c]],
              $sformatf("cu%0d %h -> %h expected %h", c, pend[c], cu_rsp[c].pfn, u_mem.exp_pfn[pend[c]]));
      end
    end
  end

  bit stop_issue = 0;
  always @(negedge clk) begin
    for (int c = 0; c < NCU; c++) begin
      if (!rst_n) cu_req_valid[c] <= 0;
      else if (cu_req_valid[c] && !cu_req_ready[c]) ;          // hold
      else if (!stop_issue && !busy[c] && !cu_req_valid[c] && $urandom_range(0, 1) == 0) begin
        cu_req_valid[c] <= 1; cu_req_vfn[c] <= pick(c);
      end else cu_req_valid[c] <= 0;
    end
  end

  // stall watchdog: a compute unit with a request outstanding or not yet
  // accepted must get a reply within 20000 cycles
  int idle_cycles = 0;
  always @(posedge clk) begin
    bit waiting = 0;
    for (int c = 0; c < NCU; c++) waiting |= busy[c] || cu_req_valid[c];
    idle_cycles = (waiting && cu_rsp_valid == '0) ? idle_cycles + 1 : 0;
    if (idle_cycles > 20000) begin
      $display("stall: no reply for 20000 cycles"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog: issued %0d done %0d", issued, done); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic quiesce();
    bit any;
    stop_issue = 1;
    do begin
      @(posedge clk); #1;
      any = |cu_req_valid;
      for (int c = 0; c < NCU; c++) any |= busy[c];
    end while (any);
    repeat (200) @(posedge clk);
  endtask

  initial begin
    inv_valid = 0; inv_all = 0; inv_vfn = 0;
    for (int c = 0; c < NCU; c++) begin busy[c] = 0; cu_req_vfn[c] = '0; end
    u_mem.build_scenario();
    repeat (3) @(posedge clk); rst_n = 1;
    wait (issued >= 4000);
    quiesce();
    u_mem.unmap_page(36'h2A8);
    u_mem.scan();
    @(negedge clk); inv_valid = 1; inv_vfn = 36'h2A8; shootdowns++;
    @(negedge clk); inv_valid = 0;
    stop_issue = 0;
    wait (issued >= 8000);
    // burst of cold contiguity checks to load every walker
    burst = 1;
    wait (issued >= 10000);
    quiesce();
    chk(done == issued, "all requests answered");
    $display("l1_hits=%0d l1_misses=%0d", l1_hits, l1_misses);
    $display("stats: sub_hit=%0d reg_hit=%0d miss=%0d ac=%0d reg=%0d sub=%0d fault=%0d msc_hit=%0d msc_miss=%0d heads=%0d pwb_wait=%0d",
      stats.tlb_sub_hit, stats.tlb_reg_hit, stats.tlb_miss, stats.walk_ac, stats.walk_regular,
      stats.walk_subreg, stats.walk_fault, stats.msc_hit, stats.msc_miss, stats.head_reads, stats.pwb_wait);
    $display("shootdowns=%0d stale_faults=%0d", shootdowns, stale_faults);
    chk(l1_hits > 0, "l1 hits");                 chk(l1_misses > 0, "l1 misses");
    chk(stats.tlb_sub_hit > 0, "sub hits");      chk(stats.tlb_reg_hit > 0, "regular hits");
    chk(stats.tlb_miss > 0, "tlb misses");       chk(stats.walk_ac > 0, "mode a walks");
    chk(stats.walk_regular > 0, "mode b walks"); chk(stats.walk_subreg > 0, "mode c walks");
    chk(stats.walk_fault > 0, "faults");         chk(stats.msc_hit > 0, "msc hits");
    chk(stats.msc_miss > 0, "msc misses");       chk(stats.head_reads > 0, "head reads");
    chk(stats.pwb_wait > 0, "pwb waits");        chk(shootdowns > 0 && stale_faults > 0, "shootdown");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
