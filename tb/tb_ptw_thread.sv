// tb_ptw_thread: one walker thread with a real PWC and MSC and the
// behavioural page-table memory. Every shared port is granted at once.
// It checks the three walk modes on the worked-example frame and on a fully
// contiguous frame: the early reply, the coalesced fill (tag, length, base),
// the MSC miss with five neighbour head reads and the later MSC hit, a fault
// on an unmapped page, and that a PWC hit cuts the walk to one memory read.
module tb_ptw_thread;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start_valid, start_ready; vfn_t start_vfn; logic [3:0] start_src;
  logic pwc_req, pwc_we, pwc_hit; logic [1:0] pwc_level; logic [LPN_W-1:0] pwc_prefix; pte_t pwc_wdata, pwc_pte;
  logic mem_req, mem_rsp_valid; logic [PA_W-1:0] mem_addr; pte_t mem_rsp_data; logic [3:0] mem_rsp_id;
  logic msc_req, msc_we, msc_hit; logic [LPN_W-1:0] msc_lpn; logic [6:0] msc_wbitmap, msc_bitmap;
  logic fill_req; tlb_fill_t fill; logic rsp_req; xlate_rsp_t rsp; logic [3:0] rsp_src;
  logic ev_mode, ev_msc_hit, ev_msc_miss, ev_head_read; walk_mode_e ev_mode_kind;
  logic mem_ready;
  int checks = 0, failures = 0;
  int heads = 0, msc_hits = 0, msc_misses = 0;

  ptw_thread dut (
    .clk, .rst_n, .cr3_pfn(u_mem.cr3),
    .start_valid, .start_ready, .start_vfn, .start_src,
    .pwc_req, .pwc_gnt(pwc_req), .pwc_we, .pwc_level, .pwc_prefix, .pwc_wdata, .pwc_hit, .pwc_pte,
    .mem_req, .mem_gnt(mem_req), .mem_addr, .mem_rsp_valid, .mem_rsp_data,
    .msc_req, .msc_gnt(msc_req), .msc_we, .msc_lpn, .msc_wbitmap, .msc_hit, .msc_bitmap,
    .fill_req, .fill_gnt(fill_req), .fill, .rsp_req, .rsp_gnt(rsp_req), .rsp, .rsp_src,
    .ev_mode, .ev_mode_kind, .ev_msc_hit, .ev_msc_miss, .ev_head_read);

  pwc u_pwc (.clk, .rst_n, .lk_valid(pwc_req && !pwc_we), .lk_level(pwc_level), .lk_prefix(pwc_prefix),
             .lk_hit(pwc_hit), .lk_pte(pwc_pte), .wr_valid(pwc_req && pwc_we), .wr_level(pwc_level),
             .wr_prefix(pwc_prefix), .wr_pte(pwc_wdata), .inv_all(1'b0));
  msc u_msc (.clk, .rst_n, .lk_valid(msc_req && !msc_we), .lk_lpn(msc_lpn), .lk_hit(msc_hit), .lk_bitmap(msc_bitmap),
             .ins_valid(msc_req && msc_we), .ins_lpn(msc_lpn), .ins_bitmap(msc_wbitmap),
             .inv_valid(1'b0), .inv_lpn('0), .inv_all(1'b0));
  pt_mem_model #(.ID_W(4)) u_mem (.clk, .req_valid(mem_req), .req_ready(mem_ready), .req_addr(mem_addr),
             .req_id(4'd0), .rsp_valid(mem_rsp_valid), .rsp_id(mem_rsp_id), .rsp_data(mem_rsp_data));

  always @(posedge clk) if (rst_n) begin
    if (ev_head_read) heads++;
    if (ev_msc_hit) msc_hits++;
    if (ev_msc_miss) msc_misses++;
  end

  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // run one walk; capture the reply and the fill (if any)
  task automatic walk(vfn_t v, output xlate_rsp_t r, output bit filled, output tlb_fill_t f, output int nreads);
    int r0 = u_mem.reads;
    filled = 0;
    @(negedge clk); start_valid = 1; start_vfn = v; start_src = 4'd9;
    @(negedge clk); start_valid = 0;
    while (!rsp_req) @(negedge clk);
    r = rsp; chk(rsp_src == 4'd9, "source id returned");
    @(negedge clk);
    while (!start_ready) begin
      if (fill_req) begin filled = 1; f = fill; end
      @(negedge clk);
    end
    nreads = u_mem.reads - r0;
  endtask

  initial begin
    xlate_rsp_t r; bit fl; tlb_fill_t f; int n;
    start_valid = 0; start_vfn = 0; start_src = 0;
    u_mem.build_scenario();
    repeat (3) @(posedge clk); rst_n = 1;
    // (c) contiguous subregion S2 of the example frame, MSC miss
    walk(36'h2A7, r, fl, f, n);
    chk(!r.fault && r.pfn == u_mem.exp_pfn[36'h2A7], $sformatf("mode c pfn %h", r.pfn));
    chk(fl && f.t && f.vsn == 30'h8 && f.len == 3 && f.base == 36'h00F87,
        $sformatf("coalesced entry vsn=%h len=%0d base=%h", f.vsn, f.len, f.base));
    chk(msc_misses == 1 && heads == 5, $sformatf("msc miss, 5 neighbour heads (got %0d)", heads));
    chk(n == 4 + 5, $sformatf("cold walk reads %0d", n));
    // (c) again in S7 of the same frame: MSC hit, no neighbour reads, PWC hit
    walk(36'h3C5, r, fl, f, n);
    chk(r.pfn == u_mem.exp_pfn[36'h3C5], "S7 pfn");
    chk(fl && f.vsn == 30'hF && f.len == 0 && f.base == 36'h0205D, "S7 entry");
    chk(msc_hits == 1 && heads == 5 && n == 1, $sformatf("msc hit, one memory read (n=%0d)", n));
    walk(36'h312, r, fl, f, n);
    chk(fl && f.vsn == 30'hC && f.len == 0 && f.base == 36'h0201D && r.pfn == u_mem.exp_pfn[36'h312], "S4 entry");
    // (b) discontiguous subregion S5
    walk(36'h351, r, fl, f, n);
    chk(r.pfn == u_mem.exp_pfn[36'h351] && fl && !f.t && f.vfn == 36'h351 && f.base == r.pfn, "mode b");
    // (a) contiguous large page frame
    walk(36'h80123, r, fl, f, n);
    chk(r.pfn == 36'h6000A + 36'h123, "mode a pfn");
    chk(fl && f.t && f.vsn == {27'h400, 3'd0} && f.len == 7 && f.base == 36'h6000A, "mode a entry");
    // fault on the unmapped page
    walk(36'h80410, r, fl, f, n);
    chk(r.fault && !fl, "fault without fill");
    // frame with every subregion contiguous but AC clear: runs of 4
    walk(36'h80712, r, fl, f, n);
    chk(r.pfn == u_mem.exp_pfn[36'h80712] && f.vsn == {27'h403, 3'd4} && f.len == 3 && f.base == 36'h510000,
        $sformatf("upper run vsn=%h len=%0d base=%h", f.vsn, f.len, f.base));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
