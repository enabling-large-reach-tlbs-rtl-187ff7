// tb_percu_tlb: checks the per-CU TLB: a cold request goes to the IOMMU port,
// the reply is forwarded and installed, the next request hits in one cycle,
// a faulting reply is forwarded but not installed, 33 distinct pages evict the
// oldest (round-robin) entry of the 32, and shootdown removes an entry.
module tb_percu_tlb;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cu_req_valid, cu_req_ready, cu_rsp_valid, miss_valid, miss_ready, fill_valid;
  logic inv_valid, inv_all, ev_hit, ev_miss;
  vfn_t cu_req_vfn, miss_vfn, inv_vfn;
  xlate_rsp_t cu_rsp, fill_rsp;
  int checks = 0, failures = 0, iommu_calls = 0;
  bit fault_next = 0;

  percu_tlb dut (.*);

  // IOMMU stand-in: PFN = VFN + 0x1000 after 5 cycles
  initial begin
    fill_valid = 0; fill_rsp = '0; miss_ready = 1;
    forever begin
      @(negedge clk);
      if (miss_valid && miss_ready) begin
        vfn_t v;
        v = miss_vfn;
        iommu_calls++;
        repeat (4) @(negedge clk);
        @(posedge clk); #1 fill_valid = 1; fill_rsp = '{vfn: v, pfn: v + 36'h1000, perm: 3'b010, fault: fault_next};
        @(posedge clk); #1 fill_valid = 0;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic xl(vfn_t v, output xlate_rsp_t r, output int lat);
    @(negedge clk); cu_req_valid = 1; cu_req_vfn = v;
    @(posedge clk); #1 cu_req_valid = 0; lat = 0;
    do begin @(negedge clk); lat++; end while (!cu_rsp_valid);
    r = cu_rsp;
  endtask

  initial begin
    xlate_rsp_t r; int lat, c0;
    cu_req_valid = 0; cu_req_vfn = 0; inv_valid = 0; inv_all = 0; inv_vfn = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    xl(36'h55, r, lat); chk(r.pfn == 36'h1055 && iommu_calls == 1 && lat > 5, "cold miss via IOMMU");
    xl(36'h55, r, lat); chk(r.pfn == 36'h1055 && iommu_calls == 1 && lat == 1, $sformatf("hit in one cycle lat=%0d", lat));
    fault_next = 1;
    xl(36'h66, r, lat); chk(r.fault, "fault forwarded");
    fault_next = 0; c0 = iommu_calls;
    xl(36'h66, r, lat); chk(!r.fault && iommu_calls == c0 + 1, "fault not installed");
    for (int i = 0; i < 31; i++) xl(36'h100 + 36'(i), r, lat);   // fills the 32 entries
    c0 = iommu_calls;
    xl(36'h55, r, lat); chk(iommu_calls == c0 + 1, "oldest entry replaced");
    c0 = iommu_calls;
    xl(36'h110, r, lat); chk(iommu_calls == c0 && r.pfn == 36'h1110, "recent entry kept");
    @(negedge clk); inv_valid = 1; inv_vfn = 36'h110; @(negedge clk); inv_valid = 0;
    xl(36'h110, r, lat); chk(iommu_calls == c0 + 1, "shootdown");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
