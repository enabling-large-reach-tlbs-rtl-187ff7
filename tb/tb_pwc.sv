// tb_pwc: checks the page walk cache: entries of different levels with the
// same prefix are kept apart, a fifth key in one set evicts the least recently
// used one, and inv_all empties the cache.
module tb_pwc;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_hit, wr_valid, inv_all;
  logic [1:0] lk_level, wr_level;
  logic [LPN_W-1:0] lk_prefix, wr_prefix;
  pte_t lk_pte, wr_pte;
  int checks = 0, failures = 0;

  pwc dut (.*);

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic wr(logic [1:0] l, logic [LPN_W-1:0] p, pte_t d);
    @(negedge clk); wr_valid = 1; wr_level = l; wr_prefix = p; wr_pte = d; @(negedge clk); wr_valid = 0;
  endtask
  task automatic look(logic [1:0] l, logic [LPN_W-1:0] p, output bit h, output pte_t d);
    @(negedge clk); lk_valid = 1; lk_level = l; lk_prefix = p; #1 h = lk_hit; d = lk_pte; @(negedge clk); lk_valid = 0;
  endtask

  initial begin
    bit h; pte_t d;
    lk_valid = 0; wr_valid = 0; inv_all = 0; lk_level = 0; wr_level = 0; lk_prefix = 0; wr_prefix = 0; wr_pte = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    look(2, 27'h40, h, d); chk(!h, "cold");
    wr(2, 27'h40, 64'h1111);
    wr(3, 27'h40, 64'h3333);
    look(2, 27'h40, h, d); chk(h && d == 64'h1111, "L2 entry");
    look(3, 27'h40, h, d); chk(h && d == 64'h3333, "L3 entry kept apart");
    look(0, 27'h40, h, d); chk(!h, "L4 absent");
    for (int i = 1; i <= 3; i++) wr(2, 27'h40 + 27'(256*i), 64'(i));
    look(2, 27'h40, h, d);             // touch the first
    wr(2, 27'h40 + 27'(256*4), 64'h4); // evicts LRU: 0x40+256
    look(2, 27'h40 + 27'(256), h, d);  chk(!h, "LRU evicted");
    look(2, 27'h40, h, d);             chk(h, "recently used kept");
    look(2, 27'h40 + 27'(1024), h, d); chk(h && d == 64'h4, "new entry");
    @(negedge clk); inv_all = 1; @(negedge clk); inv_all = 0;
    look(3, 27'h40, h, d); chk(!h, "flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
