// percu_tlb: private L1 TLB of one GPU compute unit (CU). Fully associative,
// 32 entries by default, regular 4KB translations only: MESC keeps the
// per-CU TLBs unchanged and adds coalescing only to the shared IOMMU TLB.
//
// Timing: a request accepted in cycle t is looked up in t+1; a hit is
// returned in t+1 (cu_rsp_valid, one-cycle pulse, the CU always accepts).
// A miss is sent to the IOMMU (miss_valid/miss_ready) and the TLB blocks
// until the IOMMU reply arrives (fill_valid); the reply is installed, unless it
// is a fault, and forwarded to the CU in the same cycle. Replacement is
// round-robin and one miss is outstanding at a time; both are this design's
// choices, the paper gives only size and associativity. inv_valid removes the
// entry of inv_vfn, inv_all empties the TLB.
// Lint note: Verilator reports SYNCASYNCNET on rst_n because the assertions
// below use it in 'disable iff', which it counts as a synchronous use; every
// flip-flop here resets asynchronously, so the warning stands.
module percu_tlb
  import mesc_pkg::*;
#(
  parameter int ENTRIES = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cu_req_valid,
  output logic       cu_req_ready,
  input  vfn_t       cu_req_vfn,
  output logic       cu_rsp_valid,
  output xlate_rsp_t cu_rsp,
  output logic       miss_valid,
  input  logic       miss_ready,
  output vfn_t       miss_vfn,
  input  logic       fill_valid,
  input  xlate_rsp_t fill_rsp,
  input  logic       inv_valid,
  input  vfn_t       inv_vfn,
  input  logic       inv_all,
  output logic       ev_hit,
  output logic       ev_miss
);
  localparam int EW = $clog2(ENTRIES);

  vfn_t          tag  [ENTRIES];
  pfn_t          data [ENTRIES];
  perm_t         perm [ENTRIES];
  logic [ENTRIES-1:0] vld;
  logic [EW-1:0] rr;

  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_MISS, S_WAIT} state_e;
  state_e state;
  vfn_t   vfn_q;

  logic hit; logic [EW-1:0] hidx;
  always_comb begin
    hit = 1'b0; hidx = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (!hit && vld[e] && tag[e] == vfn_q) begin hit = 1'b1; hidx = EW'(e); end
  end

  assign cu_req_ready = (state == S_IDLE);
  assign miss_valid   = (state == S_MISS);
  assign miss_vfn     = vfn_q;
  assign ev_hit       = (state == S_LOOK) && hit;
  assign ev_miss      = (state == S_LOOK) && !hit;

  always_comb begin
    cu_rsp_valid = 1'b0;
    cu_rsp       = '{vfn: vfn_q, pfn: data[hidx], perm: perm[hidx], fault: 1'b0};
    if (state == S_LOOK && hit) cu_rsp_valid = 1'b1;
    else if (state == S_WAIT && fill_valid) begin
      cu_rsp_valid = 1'b1;
      cu_rsp       = fill_rsp;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WAIT && fill_valid && !fill_rsp.fault) begin
      tag[rr]  <= fill_rsp.vfn;
      data[rr] <= fill_rsp.pfn;
      perm[rr] <= fill_rsp.perm;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; vfn_q <= '0; vld <= '0; rr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cu_req_valid) begin vfn_q <= cu_req_vfn; state <= S_LOOK; end
        S_LOOK: state <= hit ? S_IDLE : S_MISS;
        S_MISS: if (miss_ready) state <= S_WAIT;
        S_WAIT: if (fill_valid) begin
          state <= S_IDLE;
          if (!fill_rsp.fault) begin vld[rr] <= 1'b1; rr <= rr + 1'b1; end
        end
      endcase
      if (inv_all) vld <= '0;
      else if (inv_valid)
        for (int e = 0; e < ENTRIES; e++) if (tag[e] == inv_vfn) vld[e] <= 1'b0;
    end
  end

  a_fill_match: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_WAIT && fill_valid |-> fill_rsp.vfn == vfn_q);
endmodule
