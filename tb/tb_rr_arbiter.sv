// tb_rr_arbiter: random request vectors into an 8-way round-robin arbiter.
// A reference model keeps its own priority pointer; each cycle the grant must
// be the first requester at or after the pointer, one-hot and matching
// gnt_idx, and the pointer moves past the winner only when accept is high.
// It also checks that a requester held high is served within N grants.
module tb_rr_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, gnt; logic accept, any; logic [2:0] gnt_idx;
  int checks = 0, failures = 0, ptr = 0, wait0 = 0;
  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .accept, .gnt, .gnt_idx, .any);
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    req = 0; accept = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int exp;
      @(negedge clk);
      req = N'($urandom) | (n >= 2000 ? N'(1) : '0);  // requester 0 held high late on
      accept = $urandom_range(0, 3) != 0;
      #1;
      exp = -1;
      for (int k = 0; k < N; k++) if (exp < 0 && req[(ptr + k) % N]) exp = (ptr + k) % N;
      checks++;
      if (exp < 0) begin if (any || gnt != 0) begin failures++; $display("FAIL grant with no request"); end end
      else if (!any || gnt != N'(1) << exp || int'(gnt_idx) != exp) begin
        failures++; $display("FAIL req=%b ptr=%0d gnt=%b idx=%0d exp=%0d", req, ptr, gnt, gnt_idx, exp);
      end
      if (n >= 2000) begin
        if (gnt[0] && accept) wait0 = 0; else if (accept && any) wait0++;
        checks++; if (wait0 > N) begin failures++; $display("FAIL starvation"); end
      end
      @(posedge clk);
      if (exp >= 0 && accept) ptr = (exp + 1) % N;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
