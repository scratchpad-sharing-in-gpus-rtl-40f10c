// resource_access: scratchpad access check for one warp's next instruction,
// following the access flow of scratchpad sharing:
//   (b) a thread of a block that shares with nobody (or ShSM = 0) goes
//       straight to the scratchpad;
//   (c) otherwise an offset below t*R_tb (u_bytes) is in the block's private
//       part and goes straight to the scratchpad;
//   (e) any other offset is in the pair's shared part: it may go only if the
//       block holds the pair lock, otherwise the warp retries next cycle.
// A warp is checked as a whole: it needs the lock if any active lane's
// offset is shared.  When the lock is free the unit raises acq_req, the
// storage units grant it at the clock edge and the warp passes the check in
// the next cycle.  Instructions that do not touch scratchpad always pass.
//
// The unit also maps each lane's block-relative offset to a physical byte
// address.  The layout is this design's own (the paper gives only the
// sizes): pair k occupies (R_tb + u) bytes from k*(R_tb+u), holding the
// private part of slot k, the private part of slot m+k and then the shared
// part; blocks that do not share follow the p pairs, R_tb bytes each.
//
// Purely combinational.
module resource_access
  import ssp_pkg::*;
#(
  parameter int unsigned TBMAX = MAX_TB,
  parameter int unsigned LANES = WARP_SIZE
) (
  input  ssp_cfg_t          cfg,
  input  logic              shsm,
  input  logic [SLOT_W-1:0] slot,               // block slot of the warp
  input  logic [SHTB_W-1:0] shtb_entry,         // ShTB[slot]
  input  lock_t             lock [TBMAX/2],
  input  logic              is_smem,            // next instr. is a smem access
  input  logic [LANES-1:0]  mask,               // its active lanes
  input  logic [ADDR_W-1:0] offset [LANES],     // block-relative offsets
  output logic              unshared_tb,        // step (b)
  output logic [LANES-1:0]  lane_shared,        // step (c) said "shared"
  output logic              need_lock,
  output logic              has_lock,
  output logic              ready,              // may issue now
  output logic              acq_req,            // asks for a free lock
  output logic [ADDR_W-1:0] phys [LANES]
);
  localparam int unsigned NP = TBMAX / 2;

  logic [31:0] k, pair_base, priv_base, sh_base, r, u, m, p;
  lock_t       lk;

  always_comb begin
    r = 32'(cfg.r_tb);
    u = 32'(cfg.u_bytes);
    m = 32'(cfg.m_base);
    p = 32'(cfg.p_pairs);
    unshared_tb = !shsm || (shtb_entry == NO_PARTNER);
    k  = (32'(slot) < p) ? 32'(slot) : 32'(slot) - m;
    lk = lock[PAIR_W'(k % NP)];
    pair_base = k * (r + u);
    sh_base   = pair_base + 2 * u;
    if (unshared_tb)
      priv_base = shsm ? (p * (r + u) + (32'(slot) - p) * r) : 32'(slot) * r;
    else
      priv_base = pair_base + ((32'(slot) < p) ? 32'd0 : u);

    for (int unsigned l = 0; l < LANES; l++) begin
      lane_shared[l] = !unshared_tb && (32'(offset[l]) >= u);
      phys[l] = lane_shared[l] ? ADDR_W'(sh_base + 32'(offset[l]) - u)
                               : ADDR_W'(priv_base + 32'(offset[l]));
    end
    need_lock = is_smem && |(lane_shared & mask);
    has_lock  = lk.held && (lk.owner == slot);
    ready     = !need_lock || has_lock;
    acq_req   = need_lock && !lk.held;
  end

endmodule
