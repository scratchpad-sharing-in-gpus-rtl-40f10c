// relssp_unit: completion detector for the relssp (release shared
// scratchpad) instruction.
//
// Every thread i of the SM has an active bit A_i and a release bit R_i.
// When a warp is launched its A bits are loaded with the lanes that hold a
// thread and its R bits are cleared.  An issued relssp sets R_i for the
// warp's active lanes; an issued exit clears A_i for the lanes that end.
// For each block slot the unit forms, as in the paper's circuit,
//     lock_bit = NAND over the block's threads of (R_i OR NOT A_i)
// so the lock bit drops to 0 exactly when every active thread of the block
// has executed relssp (for all i, A_i -> R_i).  rel_done is the inverse of
// the lock bit and goes to the storage units, which free the pair lock only
// if that block holds it, so relssp in a block that never took the lock has
// no effect.  Thread-to-block membership comes from the warp's slot number.
// warp_empty tells the SM that all threads of a warp have exited.
//
// Timing: bits update at the clock edge after the issue; rel_done and
// warp_empty are combinational functions of the stored bits.
module relssp_unit
  import ssp_pkg::*;
#(
  parameter int unsigned TBMAX = MAX_TB,
  parameter int unsigned NWARP = MAX_WARPS,
  parameter int unsigned LANES = WARP_SIZE,
  parameter int unsigned NISS  = NUM_SCHED
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SLOT_W-1:0] warp_slot [NWARP],
  input  logic [NWARP-1:0]  warp_live,
  // warp launch: load A with the lanes holding a thread, clear R
  input  logic [NWARP-1:0]  warp_init,
  input  logic [LANES-1:0]  init_active [NWARP],
  // issued instructions, one per scheduler
  input  logic [NISS-1:0]   iss_valid,
  input  logic [WARP_W-1:0] iss_warp [NISS],
  input  op_e               iss_op   [NISS],
  input  logic [LANES-1:0]  iss_mask [NISS],
  output logic [TBMAX-1:0]  lock_bit,
  output logic [TBMAX-1:0]  rel_done,
  output logic [NWARP-1:0]  warp_empty
);

  logic [LANES-1:0] a_q [NWARP];
  logic [LANES-1:0] r_q [NWARP];

  logic [LANES-1:0] a_d [NWARP];
  logic [LANES-1:0] r_d [NWARP];

  always_comb
    for (int unsigned w = 0; w < NWARP; w++) begin
      a_d[w] = a_q[w];
      r_d[w] = r_q[w];
      for (int unsigned s = 0; s < NISS; s++)
        if (iss_valid[s] && 32'(iss_warp[s]) == w) begin
          if (iss_op[s] == OP_RELSSP) r_d[w] = r_d[w] | (iss_mask[s] & a_q[w]);
          if (iss_op[s] == OP_EXIT)   a_d[w] = a_d[w] & ~iss_mask[s];
        end
      if (warp_init[w]) begin
        a_d[w] = init_active[w];
        r_d[w] = '0;
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int unsigned w = 0; w < NWARP; w++) begin
        a_q[w] <= '0;
        r_q[w] <= '0;
      end
    else
      for (int unsigned w = 0; w < NWARP; w++) begin
        a_q[w] <= a_d[w];
        r_q[w] <= r_d[w];
      end

  always_comb begin
    for (int unsigned t = 0; t < TBMAX; t++) begin
      logic all_or;
      all_or = 1'b1;
      for (int unsigned w = 0; w < NWARP; w++)
        if (warp_live[w] && 32'(warp_slot[w]) == t)
          all_or = all_or & (&(r_q[w] | ~a_q[w]));
      lock_bit[t] = ~all_or;     // the NAND of the OR terms
      rel_done[t] = ~lock_bit[t];
    end
    for (int unsigned w = 0; w < NWARP; w++)
      warp_empty[w] = (a_q[w] == '0);
  end

endmodule
