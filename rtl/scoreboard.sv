// scoreboard: register hazard check of the scheduler unit.
//
// One pending bit per register name and warp.  Issuing an instruction with
// a destination sets that register's bit; a writeback clears it.  A warp's
// next instruction is hazard free when none of its sources (read after
// write) and not its destination (write after write) is pending.  This is
// the usual in-order scoreboard of a GPU SM; the paper only names the block,
// so its organisation here is the simplest that does the job.
//
// Timing: bits change at the clock edge; ready[] reads the stored bits, so a
// writeback in cycle c lets a dependent instruction issue in cycle c+1.  If
// a writeback and an issue name the same register of a warp in one cycle,
// the new write wins and the bit stays set.  warp_init clears a warp.
module scoreboard
  import ssp_pkg::*;
#(
  parameter int unsigned NWARP = MAX_WARPS,
  parameter int unsigned NISS  = NUM_SCHED,
  parameter int unsigned NWB   = WB_PORTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NWARP-1:0]  warp_init,
  input  logic [NISS-1:0]   iss_valid,
  input  logic [WARP_W-1:0] iss_warp [NISS],
  input  reg_ref_t          iss_dst  [NISS],
  input  logic [NWB-1:0]    wb_valid,
  input  logic [WARP_W-1:0] wb_warp  [NWB],
  input  logic [REG_W-1:0]  wb_reg   [NWB],
  input  instr_t            chk      [NWARP],  // next instruction per warp
  output logic [NWARP-1:0]  ready
);

  logic [NUM_REGS-1:0] pend [NWARP];

  logic [NUM_REGS-1:0] pend_d [NWARP];

  always_comb
    for (int unsigned w = 0; w < NWARP; w++) begin
      pend_d[w] = pend[w];
      for (int unsigned b = 0; b < NWB; b++)
        if (wb_valid[b] && 32'(wb_warp[b]) == w) pend_d[w][wb_reg[b]] = 1'b0;
      for (int unsigned s = 0; s < NISS; s++)
        if (iss_valid[s] && 32'(iss_warp[s]) == w && iss_dst[s].v)
          pend_d[w][iss_dst[s].r] = 1'b1;
      if (warp_init[w]) pend_d[w] = '0;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int unsigned w = 0; w < NWARP; w++) pend[w] <= '0;
    else        for (int unsigned w = 0; w < NWARP; w++) pend[w] <= pend_d[w];

  always_comb
    for (int unsigned w = 0; w < NWARP; w++)
      ready[w] = !(chk[w].src1.v && pend[w][chk[w].src1.r]) &&
                 !(chk[w].src2.v && pend[w][chk[w].src2.r]) &&
                 !(chk[w].dst.v  && pend[w][chk[w].dst.r]);

endmodule
