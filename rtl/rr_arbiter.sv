// rr_arbiter: round-robin arbiter used wherever several requesters share one
// port (page-table-walker threads sharing the memory port, the PWC, the MSC
// and the TLB fill port; per-CU TLBs sharing the IOMMU request port).
// gnt is one-hot and combinational from req; the rotating priority pointer
// moves past the granted requester when `accept` is high in that cycle.
// The arbitration policy is this design's own choice.
// Lint note: Verilator reports SYNCASYNCNET on rst_n because the assertions
// below use it in 'disable iff', which it counts as a synchronous use; every
// flip-flop here resets asynchronously, so the warning stands.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 accept,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic                 any
);
  localparam int IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;

  // requests rotated so that position 0 is the current priority holder
  logic [2*N-1:0] rot;
  assign rot = {req, req} >> ptr;

  always_comb begin
    gnt_idx = '0;
    any     = 1'b0;
    for (int k = 0; k < N; k++) begin
      if (!any && rot[k]) begin
        any     = 1'b1;
        gnt_idx = IW'((int'(ptr) + k) % N);
      end
    end
    gnt = any ? N'(1) << gnt_idx : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (any && accept) ptr <= (gnt_idx == IW'(N-1)) ? '0 : gnt_idx + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_subset: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
