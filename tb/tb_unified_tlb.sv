// tb_unified_tlb: checks the MESC unified shared TLB.
//  - a regular entry hits with a two-cycle reply, a neighbour page misses;
//  - the coalesced subregion entry of the worked example (tag 0x8, length 3,
//    base 0x00F87) covers VFNs 0x200..0x2FF with a one-cycle reply and
//    PFN = base + (VFN - 0x200), and misses at 0x300;
//  - way partitioning: nine subregion entries of one set keep only eight,
//    while sixteen regular entries of one set all stay;
//  - shootdown of a VFN removes the covering subregion entry.
module tb_unified_tlb;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rsp_valid, rsp_ready, rsp_hit, rsp_sub;
  vfn_t req_vfn, rsp_vfn; pfn_t rsp_pfn; perm_t rsp_perm;
  logic fill_valid; tlb_fill_t fill;
  logic inv_valid, inv_all; vfn_t inv_vfn;
  int checks = 0, failures = 0;

  unified_tlb dut (.*);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // lookup; returns hit, pfn and the number of cycles from accept to reply
  task automatic look(vfn_t v, output bit hit, output pfn_t p, output int lat);
    @(negedge clk); req_valid = 1; req_vfn = v;
    @(posedge clk); #1 req_valid = 0; lat = 0;
    while (!rsp_valid) begin @(posedge clk); #1; lat++; end
    lat++;
    hit = rsp_hit; p = rsp_pfn;
    @(posedge clk); #1;
  endtask

  task automatic do_fill(bit t, vfn_t v, logic [VSN_W-1:0] vsn, logic [2:0] len, pfn_t b);
    @(negedge clk); fill_valid = 1;
    fill = '{t: t, vfn: v, vsn: vsn, len: len, base: b, perm: 3'b010};
    @(negedge clk); fill_valid = 0;
  endtask

  initial begin
    bit h; pfn_t p; int lat, nhit;
    req_valid = 0; rsp_ready = 1; fill_valid = 0; fill = '0; inv_valid = 0; inv_all = 0; inv_vfn = '0; req_vfn = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    look(36'h12345, h, p, lat); chk(!h && lat == 2, "cold miss");
    do_fill(0, 36'h12345, '0, 0, 36'hABCDE);
    look(36'h12345, h, p, lat); chk(h && p == 36'hABCDE && lat == 2, $sformatf("regular hit p=%h lat=%0d", p, lat));
    look(36'h12346, h, p, lat); chk(!h, "neighbour miss");
    do_fill(1, '0, 30'h8, 3, 36'h00F87);
    look(36'h200, h, p, lat); chk(h && p == 36'h00F87 && lat == 1, $sformatf("sub lower p=%h lat=%0d", p, lat));
    look(36'h2FF, h, p, lat); chk(h && p == 36'h00F87 + 36'hFF, "sub upper");
    look(36'h2A7, h, p, lat); chk(h && p == 36'h00F87 + 36'hA7, "sub middle");
    look(36'h300, h, p, lat); chk(!h, "beyond length");
    look(36'h1FF, h, p, lat); chk(!h, "below base");
    // way partitioning: 9 subregion entries to set 5 (VSN[7:3] = 5)
    for (int i = 0; i < 9; i++) do_fill(1, '0, 30'((i << 8) | (5 << 3)), 0, 36'h40000 + 36'(i*64));
    nhit = 0;
    for (int i = 0; i < 9; i++) begin
      look(36'((((i << 8) | (5 << 3))) << 6), h, p, lat);
      if (h) begin nhit++; chk(p == 36'h40000 + 36'(i*64), "sub set pfn"); end
    end
    chk(nhit == 8, $sformatf("subregion partition holds 8, got %0d", nhit));
    // 16 regular entries in set 7 all fit
    for (int i = 0; i < 16; i++) do_fill(0, 36'((i << 5) | 7) + 36'h100000, '0, 0, 36'h7000 + 36'(i));
    nhit = 0;
    for (int i = 0; i < 16; i++) begin
      look(36'((i << 5) | 7) + 36'h100000, h, p, lat);
      if (h && p == 36'h7000 + 36'(i)) nhit++;
    end
    chk(nhit == 16, $sformatf("regular entries use all 16 ways, got %0d", nhit));
    // shootdown inside the coalesced entry
    @(negedge clk); inv_valid = 1; inv_vfn = 36'h250; @(negedge clk); inv_valid = 0;
    look(36'h210, h, p, lat); chk(!h, "subregion entry shot down");
    look(36'h12345, h, p, lat); chk(h, "unrelated entry kept");
    @(negedge clk); inv_all = 1; @(negedge clk); inv_all = 0;
    look(36'h12345, h, p, lat); chk(!h, "flush all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
