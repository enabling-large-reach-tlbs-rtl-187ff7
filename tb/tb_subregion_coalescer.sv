// tb_subregion_coalescer: checks the run search that forms a subregion TLB
// entry. The three entries of the worked example (tags 0x8/0xC/0xF, lengths
// 3/0/0, base PFNs 0x00F87/0x0201D/0x0205D) are checked, then random bitmaps
// against a reference that walks the bitmap bit by bit.
module tb_subregion_coalescer;
  import mesc_pkg::*;
  logic [LPN_W-1:0] lpn;
  logic [2:0]       sub;
  pfn_t             head;
  logic [6:0]       bitmap;
  logic [VSN_W-1:0] vsn;
  logic [2:0]       len;
  pfn_t             base;
  int checks = 0, failures = 0;

  subregion_coalescer dut (.lpn(lpn), .sub(sub), .head_pfn(head), .bitmap(bitmap),
                           .vsn(vsn), .len(len), .base(base));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_entry(logic [VSN_W-1:0] ev, logic [2:0] el, pfn_t eb);
    #1; checks++;
    if (vsn !== ev || len !== el || base !== eb) begin
      failures++;
      $display("sub=%0d bmp=%b: got vsn %h len %0d base %h, exp %h %0d %h", sub, bitmap, vsn, len, base, ev, el, eb);
    end
  endtask

  initial begin
    lpn = 1; bitmap = 7'b000_0111;
    sub = 0; head = 36'h00F87; expect_entry(30'h8, 3, 36'h00F87);
    sub = 2; head = 36'h01007; expect_entry(30'h8, 3, 36'h00F87);
    sub = 3; head = 36'h01047; expect_entry(30'h8, 3, 36'h00F87);
    sub = 4; head = 36'h0201D; expect_entry(30'hC, 0, 36'h0201D);
    sub = 7; head = 36'h0205D; expect_entry(30'hF, 0, 36'h0205D);
    for (int n = 0; n < 2000; n++) begin
      int lo, hi;
      lpn = LPN_W'($urandom); bitmap = 7'($urandom); sub = 3'($urandom);
      head = pfn_t'($urandom) + 36'h1000;
      lo = sub; while (lo > 0 && bitmap[lo-1]) lo--;
      hi = sub; while (hi < 7 && bitmap[hi]) hi++;
      expect_entry({lpn, 3'(lo)}, 3'(hi - lo), head - pfn_t'(64 * (sub - lo)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
