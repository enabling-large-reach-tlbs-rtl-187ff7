// tb_msc: checks the memory subregion cache: insert and lookup of bitmaps,
// replacement of the least recently used of five frames mapping to one set,
// update in place, and invalidation of one frame and of all.
module tb_msc;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_hit, ins_valid, inv_valid, inv_all;
  logic [LPN_W-1:0] lk_lpn, ins_lpn, inv_lpn;
  logic [6:0] lk_bitmap, ins_bitmap;
  int checks = 0, failures = 0;

  msc dut (.*);

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic ins(logic [LPN_W-1:0] l, logic [6:0] b);
    @(negedge clk); ins_valid = 1; ins_lpn = l; ins_bitmap = b; @(negedge clk); ins_valid = 0;
  endtask
  task automatic look(logic [LPN_W-1:0] l, output bit h, output logic [6:0] b);
    @(negedge clk); lk_valid = 1; lk_lpn = l; #1 h = lk_hit; b = lk_bitmap; @(negedge clk); lk_valid = 0;
  endtask

  initial begin
    bit h; logic [6:0] b;
    lk_valid = 0; ins_valid = 0; inv_valid = 0; inv_all = 0; lk_lpn = 0; ins_lpn = 0; inv_lpn = 0; ins_bitmap = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    look(27'h1, h, b); chk(!h, "cold");
    ins(27'h1, 7'b0000111);
    look(27'h1, h, b); chk(h && b == 7'b0000111, "hit example bitmap");
    // five frames in set 3 (128 sets): 3, 3+128, ... ; touch the first again
    for (int i = 0; i < 4; i++) ins(27'(3 + 128*i), 7'(i+1));
    look(27'(3), h, b); chk(h && b == 7'd1, "way 0 still there");
    ins(27'(3 + 128*4), 7'd5);                      // evicts LRU = frame 3+128
    look(27'(3 + 128), h, b);   chk(!h, "LRU evicted");
    look(27'(3), h, b);         chk(h, "MRU kept");
    look(27'(3 + 128*4), h, b); chk(h && b == 7'd5, "new entry");
    ins(27'(3), 7'h7F);
    look(27'(3), h, b);         chk(h && b == 7'h7F, "update in place");
    @(negedge clk); inv_valid = 1; inv_lpn = 27'(3); @(negedge clk); inv_valid = 0;
    look(27'(3), h, b);         chk(!h, "invalidated");
    look(27'h1, h, b);          chk(h, "other kept");
    @(negedge clk); inv_all = 1; @(negedge clk); inv_all = 0;
    look(27'h1, h, b);          chk(!h, "flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
