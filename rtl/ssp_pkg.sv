// ssp_pkg: sizes and types shared by the scratchpad-sharing SM logic.
//
// The default sizes are those of the simulated GPU the design is evaluated
// on: 16 KB of scratchpad per SM, at most 16 resident thread blocks, at most
// 3072 threads (96 warps of 32) and 4 warp schedulers per SM, and a sharing
// threshold t = 0.1 (each block of a sharing pair keeps 10 % of its
// scratchpad private, the other 90 % is shared by the pair).  The number of
// architectural registers a warp may name (64) and the number of writeback
// ports (4) are choices of this design.
package ssp_pkg;

  // ---- sizes of the SM -------------------------------------------------
  parameter int unsigned SMEM_BYTES = 16384; // scratchpad bytes per SM
  parameter int unsigned MAX_TB     = 16;    // resident thread blocks (T)
  parameter int unsigned WARP_SIZE  = 32;    // threads per warp
  parameter int unsigned MAX_WARPS  = 96;    // resident warps (W) = 3072/32
  parameter int unsigned NUM_SCHED  = 4;     // scheduler units per SM
  parameter int unsigned NUM_REGS   = 64;    // register names per warp
  parameter int unsigned WB_PORTS   = 4;     // register writebacks per cycle

  // sharing threshold t = T_NUM / T_DEN
  parameter int unsigned T_NUM = 1;
  parameter int unsigned T_DEN = 10;

  // ---- derived widths ----------------------------------------------------
  parameter int unsigned ADDR_W  = $clog2(SMEM_BYTES);     // byte address
  parameter int unsigned SIZE_W  = $clog2(SMEM_BYTES + 1); // byte count
  parameter int unsigned SLOT_W  = $clog2(MAX_TB);         // block slot id
  parameter int unsigned SHTB_W  = $clog2(MAX_TB + 1);     // ShTB entry
  parameter int unsigned CNT_W   = $clog2(MAX_TB + 1);     // block count
  parameter int unsigned NPAIRS  = MAX_TB / 2;             // lock entries
  parameter int unsigned PAIR_W  = (NPAIRS > 1) ? $clog2(NPAIRS) : 1;
  parameter int unsigned WARP_W  = $clog2(MAX_WARPS);
  parameter int unsigned REG_W   = $clog2(NUM_REGS);

  // ShTB value of a block that shares with nobody (the table's "-1")
  parameter logic [SHTB_W-1:0] NO_PARTNER = '1;

  // ---- instruction classes seen by the scheduler unit --------------------
  typedef enum logic [1:0] {
    OP_ALU    = 2'd0,  // any instruction that does not touch scratchpad
    OP_SMEM   = 2'd1,  // scratchpad load or store
    OP_RELSSP = 2'd2,  // release shared scratchpad
    OP_EXIT   = 2'd3   // the active threads terminate
  } op_e;

  // warp classes of Owner Warp First, in priority order
  typedef enum logic [1:0] {
    WC_OWNER    = 2'd0,
    WC_UNSHARED = 2'd1,
    WC_NONOWNER = 2'd2
  } warp_class_e;

  // one lock of the Lock table: the slot id of the block holding the
  // pair's shared region, and whether it is held at all
  typedef struct packed {
    logic              held;
    logic [SLOT_W-1:0] owner;
  } lock_t;

  // kernel-wide sharing configuration, fixed while a kernel runs
  typedef struct packed {
    logic              shsm;     // ShSM: sharing enabled on this SM
    logic [SIZE_W-1:0] r_tb;     // scratchpad bytes per block (R_tb)
    logic [SIZE_W-1:0] u_bytes;  // unshared bytes of a sharing block (t*R_tb)
    logic [CNT_W-1:0]  m_base;   // blocks the unshared baseline fits (m)
    logic [CNT_W-1:0]  p_pairs;  // sharing pairs (p)
    logic [CNT_W-1:0]  n_res;    // resident blocks with sharing (n = m + p)
  } ssp_cfg_t;

  // a register operand: valid flag and register name
  typedef struct packed {
    logic             v;
    logic [REG_W-1:0] r;
  } reg_ref_t;

  // the decoded next instruction of a warp, as the instruction buffer
  // presents it to the scheduler unit (scratchpad offsets travel beside it)
  typedef struct packed {
    op_e                  op;
    reg_ref_t             dst;
    reg_ref_t             src1;
    reg_ref_t             src2;
    logic [WARP_SIZE-1:0] mask;   // active lanes of this instruction
  } instr_t;

endpackage
