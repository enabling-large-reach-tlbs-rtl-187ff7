// tb_sync_fifo: random pushes and pops on a 16-deep FIFO compared with a
// queue model: order and data of every popped word, in_ready exactly when
// not full, out_valid exactly when not empty, and the count output.
module tb_sync_fifo;
  localparam int W = 12, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready; logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      bit push, pop;
      @(negedge clk);
      // bias towards filling in the first half and draining in the second
      in_valid  = $urandom_range(0, 9) < (n % 400 < 200 ? 8 : 3);
      out_ready = $urandom_range(0, 9) < (n % 400 < 200 ? 3 : 8);
      in_data   = W'($urandom);
      #1;
      chk(in_ready == (q.size() < D), "in_ready");
      chk(out_valid == (q.size() > 0), "out_valid");
      chk(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      if (out_valid && q.size() > 0) chk(out_data == q[0], "data order");
      push = in_valid && in_ready; pop = out_valid && out_ready;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
