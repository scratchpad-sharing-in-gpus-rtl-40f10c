// storage_units: the state scratchpad sharing adds to an SM, and the rules
// that update it.
//
//   ShSM   1 bit           sharing is enabled on this SM (n > m)
//   ShTB   MAX_TB entries  partner slot of each block slot, all ones = none
//   Owner  MAX_WARPS bits  the warp belongs to the block holding its lock
//   Lock   MAX_TB/2 entries one per sharing pair: slot id of the holder
//
// Slots are numbered as blocks are placed: slots 0..p-1 share with slots
// m..m+p-1 (slot j with slot m+j), slots p..m-1 share with nobody.  This is
// the pairing of blocks B_i with B_(mp+i) on each SM; a block launched into
// a freed slot inherits the slot's sharing status.  Lock pair k covers slots
// k and m+k.
//
// Lock rules:
//  * acquire: a warp whose next instruction touches the shared region of a
//    free lock raises acq_req.  At the clock edge the lock is given to the
//    block of the lowest-numbered requesting warp; requests in later cycles
//    find it held, so the lock is first come first served.  The warp sees
//    the grant in the following cycle (it retries, as in the access flow).
//  * release: when the relssp unit reports that every active thread of the
//    holding block has executed relssp, the lock becomes free.
//  * finish: when the holding block finishes, ownership passes to its
//    partner slot if a block is live there, otherwise the lock becomes free.
// The paper sizes a Lock entry at ceil(log2 T) bits; this design adds one
// "held" bit per entry, because an id alone cannot say that nobody holds the
// lock.  Owner bits are registered copies of what the Lock table implies.
//
// Timing: cfg_write (one cycle after the planner has loaded a new cfg)
// rebuilds ShTB and frees every lock.  All other updates take one clock.
module storage_units
  import ssp_pkg::*;
#(
  parameter int unsigned TBMAX = MAX_TB,
  parameter int unsigned NWARP = MAX_WARPS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ssp_cfg_t          cfg,
  input  logic              cfg_write,
  // per-warp bookkeeping of the baseline SM
  input  logic [SLOT_W-1:0] warp_slot [NWARP],
  input  logic [NWARP-1:0]  warp_live,
  input  logic [TBMAX-1:0]  slot_live,
  // events
  input  logic [NWARP-1:0]  acq_req,     // warp wants its pair's free lock
  input  logic [TBMAX-1:0]  rel_done,    // all active threads did relssp
  input  logic [TBMAX-1:0]  tb_finish,   // the block in this slot finished
  // state
  output logic              shsm,
  output logic [SHTB_W-1:0] shtb   [TBMAX],
  output logic [NWARP-1:0]  owner,
  output lock_t             lock   [TBMAX/2],
  // one-cycle event flags per lock, for statistics
  output logic [TBMAX/2-1:0] ev_acquire,
  output logic [TBMAX/2-1:0] ev_release,
  output logic [TBMAX/2-1:0] ev_transfer
);
  localparam int unsigned NP = TBMAX / 2;

  lock_t       lock_d [NP];
  logic [NWARP-1:0] owner_d;

  // pair index of a slot, and whether it is in a pair at all
  function automatic logic in_pair(input logic [SLOT_W-1:0] s, input int unsigned k);
    return (32'(s) == k) || (32'(s) == 32'(cfg.m_base) + k);
  endfunction

  function automatic logic [SLOT_W-1:0] partner_of(input logic [SLOT_W-1:0] s,
                                                    input int unsigned k);
    return (32'(s) == k) ? SLOT_W'(32'(cfg.m_base) + k) : SLOT_W'(k);
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < NP; k++) begin
      logic              found;
      logic [SLOT_W-1:0] winner;
      logic [SLOT_W-1:0] holder, partner;
      lock_d[k]      = lock[k];
      ev_acquire[k]  = 1'b0;
      ev_release[k]  = 1'b0;
      ev_transfer[k] = 1'b0;
      holder  = lock[k].owner;
      partner = partner_of(holder, k);
      found   = 1'b0;
      winner  = '0;
      for (int unsigned w = 0; w < NWARP; w++)
        if (!found && acq_req[w] && warp_live[w] && in_pair(warp_slot[w], k)) begin
          found  = 1'b1;
          winner = warp_slot[w];
        end
      if (k >= 32'(cfg.p_pairs) || !cfg.shsm) begin
        lock_d[k] = '0;
      end else if (lock[k].held) begin
        if (tb_finish[holder]) begin
          if (slot_live[partner] && !tb_finish[partner]) begin
            lock_d[k].owner = partner;
            ev_transfer[k]  = 1'b1;
          end else begin
            lock_d[k].held  = 1'b0;
            ev_release[k]   = 1'b1;
          end
        end else if (rel_done[holder]) begin
          lock_d[k].held = 1'b0;
          ev_release[k]  = 1'b1;
        end
      end else if (found) begin
        lock_d[k].held  = 1'b1;
        lock_d[k].owner = winner;
        ev_acquire[k]   = 1'b1;
      end
    end
    for (int unsigned w = 0; w < NWARP; w++) begin
      owner_d[w] = 1'b0;
      for (int unsigned k = 0; k < NP; k++)
        if (lock_d[k].held && lock_d[k].owner == warp_slot[w] && warp_live[w])
          owner_d[w] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shsm  <= 1'b0;
      owner <= '0;
      for (int unsigned j = 0; j < TBMAX; j++) shtb[j] <= NO_PARTNER;
      for (int unsigned k = 0; k < NP; k++)    lock[k] <= '0;
    end else if (cfg_write) begin
      shsm  <= cfg.shsm;
      owner <= '0;
      for (int unsigned j = 0; j < TBMAX; j++)
        if (cfg.shsm && j < 32'(cfg.p_pairs))
          shtb[j] <= SHTB_W'(32'(cfg.m_base) + j);
        else if (cfg.shsm && j >= 32'(cfg.m_base) && j < 32'(cfg.m_base) + 32'(cfg.p_pairs))
          shtb[j] <= SHTB_W'(j - 32'(cfg.m_base));
        else
          shtb[j] <= NO_PARTNER;
      for (int unsigned k = 0; k < NP; k++) lock[k] <= '0;
    end else begin
      owner <= owner_d;
      for (int unsigned k = 0; k < NP; k++) lock[k] <= lock_d[k];
    end
  end

endmodule
