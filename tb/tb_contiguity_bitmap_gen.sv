// tb_contiguity_bitmap_gen: checks the MSC bitmap generator against the
// worked example of a frame with three contiguous regions (subregions 0-3,
// 4 and 7, with 5 and 6 discontiguous) and against a reference computed
// here for random C bits and head PFNs.
module tb_contiguity_bitmap_gen;
  import mesc_pkg::*;
  logic [7:0] cbits;
  pfn_t       heads [8];
  logic [6:0] bitmap;
  int checks = 0, failures = 0;

  contiguity_bitmap_gen dut (.cbits(cbits), .head_pfn(heads), .bitmap(bitmap));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cbits = 8'b1001_1111;
    heads = '{36'h00F87, 36'h00FC7, 36'h01007, 36'h01047, 36'h0201D, 36'h5, 36'h9, 36'h0205D};
    #1; checks++;
    if (bitmap !== 7'b000_0111) begin failures++; $display("example: got %b", bitmap); end
    for (int n = 0; n < 2000; n++) begin
      logic [6:0] exp;
      cbits = 8'($urandom);
      heads[0] = pfn_t'($urandom);
      for (int j = 1; j < 8; j++)
        heads[j] = ($urandom % 3 != 0) ? heads[j-1] + 64 : pfn_t'($urandom);
      #1;
      for (int i = 0; i < 7; i++) exp[i] = cbits[i] & cbits[i+1] & (heads[i+1] - heads[i] == 64);
      checks++;
      if (bitmap !== exp) begin failures++; $display("rand: got %b exp %b", bitmap, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
