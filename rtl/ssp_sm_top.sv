// ssp_sm_top: the scratchpad-sharing additions to one streaming
// multiprocessor, wired around the SM's scheduler units.
//
// Scratchpad is allocated per thread block, so the last R mod R_tb bytes of
// an SM's scratchpad are usually left idle and cap the number of resident
// blocks.  Scratchpad sharing launches extra blocks that pair up with
// resident ones: each block of a pair owns t*R_tb private bytes and the pair
// shares (1-t)*R_tb bytes under a lock taken first come first served.  A
// block keeps the lock until it executes relssp with all of its active
// threads or finishes, in which case its partner inherits it.  Warps are
// issued Owner Warp First.
//
// Contents:
//   sharing_planner   m, p, n, t*R_tb and ShSM from the kernel's R_tb
//   storage_units     ShSM, ShTB, Owner bits and Lock table
//   relssp_unit       per-thread A/R bits and per-block release detect
//   scoreboard        register hazards of each warp's next instruction
//   resource_access   one per warp: lock check and address translation
//   owf_scheduler     one per scheduler unit; warp w belongs to unit
//                     w mod NSCHED
// The SM around it is outside: instruction fetch/decode and the per-warp
// instruction buffers supply each warp's next instruction (ib_*), the
// execution units return register writebacks (wb_*), the scratchpad SRAM
// and load/store path take the issued instruction with its physical lane
// addresses (iss_*), and the block dispatcher places blocks in slots
// (tb_launch_*) and learns of finished ones (tb_done).
//
// Block and warp bookkeeping here: a launch names the slot, the first warp
// id and the thread count; warps of a block have consecutive ids and warp i
// holds threads 32i..32i+31.  A warp retires when all its threads have
// executed exit, and a block finishes when all its warps have retired.
//
// Timing: one instruction per scheduler unit per cycle.  A scratchpad
// access that needs a free lock issues two cycles after it first becomes a
// candidate (request, grant, issue).  A block's tb_done pulses in the
// cycle after its last exit issues; a lock it held passes to its partner
// at the end of that cycle, so the partner can issue its shared access two
// cycles after that exit.  cfg_load must be applied while no block is
// resident; ShTB is rebuilt one cycle later.
module ssp_sm_top
  import ssp_pkg::*;
#(
  parameter int unsigned TBMAX  = MAX_TB,
  parameter int unsigned NWARP  = MAX_WARPS,
  parameter int unsigned LANES  = WARP_SIZE,
  parameter int unsigned NSCHED = NUM_SCHED,
  parameter int unsigned NWB    = WB_PORTS,
  localparam int unsigned NWS   = NWARP / NSCHED,
  localparam int unsigned IW    = (NWS > 1) ? $clog2(NWS) : 1,
  localparam int unsigned THR_W = $clog2(NWARP * LANES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel configuration
  input  logic              cfg_load,
  input  logic [SIZE_W-1:0] cfg_smem_per_tb,
  input  logic [CNT_W-1:0]  cfg_tb_limit,
  output ssp_cfg_t          cfg,
  // block launch from the dispatcher
  input  logic              tb_launch_valid,
  input  logic [SLOT_W-1:0] tb_launch_slot,
  input  logic [WARP_W-1:0] tb_launch_warp0,
  input  logic [THR_W-1:0]  tb_launch_threads,
  output logic [TBMAX-1:0]  tb_done,
  output logic [TBMAX-1:0]  slot_live,
  // next instruction of each warp (instruction buffer heads)
  input  logic [NWARP-1:0]  ib_valid,
  input  instr_t            ib_instr  [NWARP],
  input  logic [ADDR_W-1:0] ib_offset [NWARP][LANES],
  // register writebacks from the execution units
  input  logic [NWB-1:0]    wb_valid,
  input  logic [WARP_W-1:0] wb_warp [NWB],
  input  logic [REG_W-1:0]  wb_reg  [NWB],
  // issued instructions, one per scheduler unit
  output logic [NSCHED-1:0] iss_valid,
  output logic [WARP_W-1:0] iss_warp  [NSCHED],
  output instr_t            iss_instr [NSCHED],
  output warp_class_e       iss_class [NSCHED],
  output logic [ADDR_W-1:0] iss_phys  [NSCHED][LANES],
  output logic [LANES-1:0]  iss_lane_shared [NSCHED],
  output logic [NSCHED-1:0] sched_stall,
  // sharing state, for observation
  output logic              shsm,
  output logic [NWARP-1:0]  owner,
  output lock_t             lock [TBMAX/2],
  output logic [NWARP-1:0]  warp_live,
  output logic [NWARP-1:0]  lock_wait,   // warp held back by a busy lock
  output logic [TBMAX-1:0]  rel_lock_bit, // relssp NAND output per slot
  output logic [TBMAX/2-1:0] ev_acquire,
  output logic [TBMAX/2-1:0] ev_release,
  output logic [TBMAX/2-1:0] ev_transfer
);

  // ---------------------------------------------------------------- config
  logic cfg_write;
  sharing_planner #(.TBMAX(TBMAX)) u_planner (
    .clk, .rst_n, .cfg_load,
    .smem_per_tb(cfg_smem_per_tb), .tb_limit(cfg_tb_limit), .cfg);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cfg_write <= 1'b0;
    else        cfg_write <= cfg_load;

  // ------------------------------------------------ warp and block tables
  logic [SLOT_W-1:0] warp_slot [NWARP];
  logic [NWARP-1:0]  warp_init, warp_empty;
  logic [LANES-1:0]  init_active [NWARP];
  logic [TBMAX-1:0]  rel_done;
  logic [SHTB_W-1:0] shtb [TBMAX];

  always_comb begin
    for (int unsigned w = 0; w < NWARP; w++) begin
      int signed first;
      first = int'(w) - int'(tb_launch_warp0);
      warp_init[w]   = tb_launch_valid && first >= 0 &&
                       32'(first) * LANES < 32'(tb_launch_threads);
      init_active[w] = '0;
      for (int unsigned l = 0; l < LANES; l++)
        if (32'(first) * LANES + l < 32'(tb_launch_threads)) init_active[w][l] = 1'b1;
    end
    for (int unsigned t = 0; t < TBMAX; t++) begin
      logic any;
      any = 1'b0;
      for (int unsigned w = 0; w < NWARP; w++)
        if (warp_live[w] && !warp_empty[w] && 32'(warp_slot[w]) == t) any = 1'b1;
      tb_done[t] = slot_live[t] && !any;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      warp_live <= '0;
      slot_live <= '0;
      for (int unsigned w = 0; w < NWARP; w++) warp_slot[w] <= '0;
    end else begin
      for (int unsigned w = 0; w < NWARP; w++)
        if (warp_init[w]) begin
          warp_live[w] <= 1'b1;
          warp_slot[w] <= tb_launch_slot;
        end else if (warp_empty[w]) begin
          warp_live[w] <= 1'b0;
        end
      for (int unsigned t = 0; t < TBMAX; t++)
        if (tb_launch_valid && 32'(tb_launch_slot) == t) slot_live[t] <= 1'b1;
        else if (tb_done[t])                             slot_live[t] <= 1'b0;
    end
  end

  // ------------------------------------------------------- storage units
  logic [NWARP-1:0] acq_req;
  storage_units #(.TBMAX(TBMAX), .NWARP(NWARP)) u_storage (
    .clk, .rst_n, .cfg, .cfg_write,
    .warp_slot, .warp_live, .slot_live,
    .acq_req, .rel_done, .tb_finish(tb_done),
    .shsm, .shtb, .owner, .lock,
    .ev_acquire, .ev_release, .ev_transfer);

  // ----------------------------------------------------------- relssp unit
  op_e              iss_op   [NSCHED];
  logic [LANES-1:0] iss_mask [NSCHED];
  reg_ref_t         iss_dst  [NSCHED];
  always_comb
    for (int unsigned s = 0; s < NSCHED; s++) begin
      iss_op[s]   = iss_instr[s].op;
      iss_mask[s] = iss_instr[s].mask[LANES-1:0];
      iss_dst[s]  = iss_instr[s].dst;
    end

  relssp_unit #(.TBMAX(TBMAX), .NWARP(NWARP), .LANES(LANES), .NISS(NSCHED)) u_relssp (
    .clk, .rst_n, .warp_slot, .warp_live, .warp_init, .init_active,
    .iss_valid, .iss_warp, .iss_op, .iss_mask,
    .lock_bit(rel_lock_bit), .rel_done, .warp_empty);

  // ------------------------------------------------------------ scoreboard
  logic [NWARP-1:0] sb_ready;
  scoreboard #(.NWARP(NWARP), .NISS(NSCHED), .NWB(NWB)) u_scoreboard (
    .clk, .rst_n, .warp_init,
    .iss_valid, .iss_warp, .iss_dst,
    .wb_valid, .wb_warp, .wb_reg,
    .chk(ib_instr), .ready(sb_ready));

  // ------------------------------------------ resource access, per warp
  logic [NWARP-1:0]  ra_ready, ra_acq, ra_unshared, ra_need, ra_has;
  logic [LANES-1:0]  ra_lane_shared [NWARP];
  logic [ADDR_W-1:0] ra_phys [NWARP][LANES];
  logic [NWARP-1:0]  cand;
  warp_class_e       wclass [NWARP];

  for (genvar w = 0; w < NWARP; w++) begin : g_ra
    resource_access #(.TBMAX(TBMAX), .LANES(LANES)) u_ra (
      .cfg, .shsm,
      .slot(warp_slot[w]), .shtb_entry(shtb[warp_slot[w]]), .lock,
      .is_smem(ib_instr[w].op == OP_SMEM),
      .mask(ib_instr[w].mask[LANES-1:0]), .offset(ib_offset[w]),
      .unshared_tb(ra_unshared[w]), .lane_shared(ra_lane_shared[w]),
      .need_lock(ra_need[w]), .has_lock(ra_has[w]),
      .ready(ra_ready[w]), .acq_req(ra_acq[w]), .phys(ra_phys[w]));
  end

  always_comb
    for (int unsigned w = 0; w < NWARP; w++) begin
      cand[w]      = ib_valid[w] && warp_live[w];
      acq_req[w]   = cand[w] && sb_ready[w] && ra_acq[w];
      lock_wait[w] = cand[w] && sb_ready[w] && !ra_ready[w];
      if (ra_unshared[w])  wclass[w] = WC_UNSHARED;
      else if (owner[w])   wclass[w] = WC_OWNER;
      else                 wclass[w] = WC_NONOWNER;
    end

  // ------------------------------------------------ scheduler units (OWF)
  for (genvar s = 0; s < NSCHED; s++) begin : g_sched
    logic [NWS-1:0] l_cand, l_ready;
    warp_class_e    l_class [NWS];
    logic [IW-1:0]  l_idx;
    logic [WARP_W-1:0] gw;

    always_comb
      for (int unsigned i = 0; i < NWS; i++) begin
        l_cand[i]  = cand[i * NSCHED + s];
        l_ready[i] = sb_ready[i * NSCHED + s] && ra_ready[i * NSCHED + s];
        l_class[i] = wclass[i * NSCHED + s];
      end

    owf_scheduler #(.NW(NWS)) u_owf (
      .clk, .rst_n, .cand(l_cand), .ready(l_ready), .wclass(l_class),
      .issue_valid(iss_valid[s]), .issue_idx(l_idx),
      .issue_class(iss_class[s]), .stall(sched_stall[s]));

    assign gw = WARP_W'(32'(l_idx) * NSCHED + s);
    assign iss_warp[s]        = gw;
    assign iss_instr[s]       = ib_instr[gw];
    assign iss_phys[s]        = ra_phys[gw];
    assign iss_lane_shared[s] = ra_lane_shared[gw] & ib_instr[gw].mask[LANES-1:0] &
                                {LANES{ib_instr[gw].op == OP_SMEM}};
  end

  // a shared-region access may only issue from the block holding the lock
  always_comb
    for (int unsigned s = 0; s < NSCHED; s++)
      if (iss_valid[s])
        assert (!ra_need[iss_warp[s]] || ra_has[iss_warp[s]])
          else $error("shared scratchpad access issued without the lock");

endmodule
