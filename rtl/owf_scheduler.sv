// owf_scheduler: Owner Warp First warp selection of one scheduler unit.
//
// The warps of the unit are ordered in three groups: warps of blocks that
// hold their pair's shared-scratchpad lock (owner warps) first, then warps
// of blocks that share with nobody (unshared warps), then warps of sharing
// blocks that do not hold the lock (non-owner warps).  The first warp in
// that order whose next instruction is ready (no register hazard and the
// scratchpad access check passes) is issued; a warp that is not ready is
// passed over for the next one.  Favouring owners lets them finish and hand
// the shared region on sooner, while non-owners fill otherwise idle cycles.
//
// Within a group the order is loose round robin, starting after the warp
// issued last, as in the baseline LRR scheduler; this tie-break is this
// design's choice.  With ShSM = 0 every warp is unshared and the unit is a
// plain LRR scheduler.
//
// Timing: selection is combinational; the round-robin pointer moves at the
// clock edge after an issue.  One warp issues per cycle at most.
module owf_scheduler
  import ssp_pkg::*;
#(
  parameter int unsigned NW  = MAX_WARPS / NUM_SCHED,
  localparam int unsigned IW = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NW-1:0]     cand,        // warp has a valid next instruction
  input  logic [NW-1:0]     ready,       // ... and it can issue now
  input  warp_class_e       wclass [NW],
  output logic              issue_valid,
  output logic [IW-1:0]     issue_idx,
  output warp_class_e       issue_class,
  output logic              stall        // candidates exist, none ready
);

  logic [IW-1:0] last_q;

  always_comb begin
    issue_valid = 1'b0;
    issue_idx   = '0;
    issue_class = WC_OWNER;
    for (int c = 0; c < 3; c++)
      for (int unsigned i = 0; i < NW; i++) begin
        logic [IW-1:0] idx;
        idx = IW'((32'(last_q) + 1 + i) % NW);
        if (!issue_valid && cand[idx] && ready[idx] && wclass[idx] == warp_class_e'(c)) begin
          issue_valid = 1'b1;
          issue_idx   = idx;
          issue_class = warp_class_e'(c);
        end
      end
    stall = (|cand) && !issue_valid;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)           last_q <= IW'(NW - 1);
    else if (issue_valid) last_q <= issue_idx;

endmodule
