// sharing_planner: decides, when a kernel is configured on the SM, how many
// thread blocks become resident and how many of them share scratchpad.
//
// Inputs are the scratchpad bytes one block needs (R_tb) and the number of
// blocks the SM's other resources would allow (threads, registers and the
// block limit, worked out by the unchanged launch logic).  The unshared
// baseline fits m = min(SMEM_BYTES / R_tb, limit) blocks.  With sharing, a
// pair of blocks is given (1+t)*R_tb bytes: t*R_tb private to each block
// and (1-t)*R_tb shared under a lock.  At most p blocks of a pair system can
// wait on a lock, so keeping p pairs and m-p unshared blocks always leaves m
// blocks able to run, as many as the baseline.  p is the largest value with
//     p <= m,   m + p <= limit,   m*R_tb + p*t*R_tb <= SMEM_BYTES,
// and n = m + p blocks are resident.  (For R_tb = 2176 bytes this gives
// m = 7, p = 5, n = 12, and for R_tb = 9408 bytes m = 1, p = 1, n = 2.)
// ShSM is set when n > m.  The rule "as many running blocks as the baseline"
// and the pairing follow the paper; the closed form for p, the rounding of
// t*R_tb down to whole bytes and the clamping are this design's.
//
// Timing: cfg_load samples the inputs; cfg holds the result from the next
// cycle until the next cfg_load.  Reset clears cfg (ShSM = 0, no blocks).
module sharing_planner
  import ssp_pkg::*;
#(
  parameter int unsigned SMEM  = SMEM_BYTES,
  parameter int unsigned TBMAX = MAX_TB,
  parameter int unsigned TNUM  = T_NUM,
  parameter int unsigned TDEN  = T_DEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_load,     // new kernel: sample the inputs
  input  logic [SIZE_W-1:0] smem_per_tb,  // R_tb in bytes
  input  logic [CNT_W-1:0]  tb_limit,     // blocks allowed by other resources
  output ssp_cfg_t          cfg
);

  ssp_cfg_t          cfg_d;
  logic [SIZE_W-1:0] m_smem, lim, m, u, spare, p_mem, p;

  always_comb begin
    lim    = (SIZE_W'(tb_limit) > SIZE_W'(TBMAX)) ? SIZE_W'(TBMAX) : SIZE_W'(tb_limit);
    m_smem = (smem_per_tb == '0) ? SIZE_W'(TBMAX) : SIZE_W'(SMEM / 32'(smem_per_tb));
    m      = (m_smem < lim) ? m_smem : lim;
    u      = SIZE_W'((32'(smem_per_tb) * TNUM) / TDEN);
    spare  = SIZE_W'(SMEM - 32'(m) * 32'(smem_per_tb));
    p_mem  = (u == '0) ? '0 : SIZE_W'(spare / u);
    p      = p_mem;
    if (p > m)       p = m;
    if (p > lim - m) p = lim - m;
    cfg_d.shsm    = (p != '0);
    cfg_d.r_tb    = smem_per_tb;
    cfg_d.u_bytes = (p != '0) ? u : smem_per_tb;
    cfg_d.m_base  = CNT_W'(m);
    cfg_d.p_pairs = CNT_W'(p);
    cfg_d.n_res   = CNT_W'(m + p);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        cfg <= '0;
    else if (cfg_load) cfg <= cfg_d;

endmodule
