// tb_ssp_sm_top: end-to-end run of the scratchpad-sharing SM logic at its
// default sizes (16 KB, 16 blocks, 96 warps, 4 scheduler units, t = 0.1).
//
// The bench plays the rest of the SM: per-warp instruction buffers holding
// small programs, execution units that write registers back after a fixed
// latency, and a block dispatcher that fills free slots.
//
// Part 1 replays the three-warp example of Owner Warp First scheduling: an
// owner warp (O), an unshared warp (U) and a non-owner warp (N) on one
// scheduler unit each run  I1: mov R1,0   I2: ld R2,S[shared]   I3: add R3,R1,R2
// (mov/add 1 cycle, load 5 cycles), O holding the pair lock from the start.
// Expected issue cycles are those of the example (O 0,1,6; U 2,3,8; N 4),
// plus this design's lock hand-over, which needs an exit instruction (O
// at 7) and one cycle of block bookkeeping: N issues I2 at 9 and I3 at 14
// where the example, which frees the lock the moment O's add completes,
// has 7 and 12.
//
// Part 2 runs a kernel of 2176-byte blocks (12 resident: 5 pairs and 2
// unshared blocks) through 40 blocks of 64 threads.  Even-numbered blocks
// release their shared region with relssp after the last use, odd ones keep
// it to the end.  The bench checks that every shared access issues only
// from the lock holder, that lanes of different live blocks never map to
// the same byte, that every block completes, and counts each mechanism.
module tb_ssp_sm_top;
  import ssp_pkg::*;
  localparam int NW = MAX_WARPS, NT = MAX_TB, L = WARP_SIZE, NS = NUM_SCHED, NB = WB_PORTS;
  localparam int PMAX = 16;

  logic clk = 0, rst_n = 0;
  logic cfg_load = 0;
  logic [SIZE_W-1:0] cfg_smem_per_tb = '0;
  logic [CNT_W-1:0] cfg_tb_limit = '0;
  ssp_cfg_t cfg;
  logic tb_launch_valid = 0;
  logic [SLOT_W-1:0] tb_launch_slot = '0;
  logic [WARP_W-1:0] tb_launch_warp0 = '0;
  logic [$clog2(NW*L+1)-1:0] tb_launch_threads = '0;
  logic [NT-1:0] tb_done, slot_live;
  logic [NW-1:0] ib_valid;
  instr_t ib_instr [NW];
  logic [ADDR_W-1:0] ib_offset [NW][L];
  logic [NB-1:0] wb_valid;
  logic [WARP_W-1:0] wb_warp [NB];
  logic [REG_W-1:0] wb_reg [NB];
  logic [NS-1:0] iss_valid, sched_stall;
  logic [WARP_W-1:0] iss_warp [NS];
  instr_t iss_instr [NS];
  warp_class_e iss_class [NS];
  logic [ADDR_W-1:0] iss_phys [NS][L];
  logic [L-1:0] iss_lane_shared [NS];
  logic shsm;
  logic [NW-1:0] owner, warp_live, lock_wait;
  logic [NT-1:0] rel_lock_bit;
  lock_t lock [NT/2];
  logic [NT/2-1:0] ev_acquire, ev_release, ev_transfer;

  ssp_sm_top dut (.*);
  always #5 clk = ~clk;

  // ------------------------------------------------------------ programs
  typedef struct {
    op_e op; int dst, src1, src2, lat, off;
  } pinstr_t;
  pinstr_t prog [NW][PMAX];
  int plen [NW], pc [NW], wslot [NW];
  bit go [NW];
  int issue_cycle [NW][PMAX];
  int cycle = 0;
  int checks = 0, failures = 0;
  // pending writebacks: cycle, warp, reg
  int wbq_c [$], wbq_w [$], wbq_r [$];
  // mechanism counters
  int n_acquire = 0, n_rel_relssp = 0, n_rel_finish = 0, n_transfer = 0;
  int n_lock_wait = 0, n_stall = 0, n_owner_iss = 0, n_unsh_iss = 0, n_nonown_iss = 0;
  int n_shared_acc = 0, n_private_acc = 0, n_done = 0, n_relssp = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive instruction buffer heads from the program counters
  always_comb
    for (int w = 0; w < NW; w++) begin
      pinstr_t p;
      p = prog[w][(pc[w] < PMAX) ? pc[w] : 0];
      ib_valid[w] = go[w] && pc[w] < plen[w];
      ib_instr[w].op   = p.op;
      ib_instr[w].dst  = '{v: p.dst >= 0, r: REG_W'(p.dst < 0 ? 0 : p.dst)};
      ib_instr[w].src1 = '{v: p.src1 >= 0, r: REG_W'(p.src1 < 0 ? 0 : p.src1)};
      ib_instr[w].src2 = '{v: p.src2 >= 0, r: REG_W'(p.src2 < 0 ? 0 : p.src2)};
      ib_instr[w].mask = '1;
      for (int l = 0; l < L; l++) ib_offset[w][l] = ADDR_W'(p.off + 4 * l);
    end

  function automatic pinstr_t mk(op_e op, int dst, int s1, int s2, int lat, int off = 0);
    pinstr_t p;
    p.op = op; p.dst = dst; p.src1 = s1; p.src2 = s2; p.lat = lat; p.off = off;
    return p;
  endfunction

  // ------------------------------------------------- per-cycle bookkeeping
  int owner_of_byte [16384];
  int pend_pc_inc [NW];

  task automatic sample_cycle;   // at the negedge: look at this cycle's issue
    for (int s = 0; s < NS; s++) if (iss_valid[s]) begin
      int w, i;
      w = iss_warp[s]; i = pc[w];
      check(w % NS == s, "warp issued by its own scheduler unit");
      check(ib_valid[w], "issued warp had an instruction");
      issue_cycle[w][i] = cycle;
      pend_pc_inc[w]++;
      if (prog[w][i].dst >= 0) begin
        wbq_c.push_back(cycle + ((prog[w][i].lat > 1) ? prog[w][i].lat - 1 : 1));
        wbq_w.push_back(w); wbq_r.push_back(prog[w][i].dst);
      end
      case (iss_class[s])
        WC_OWNER: n_owner_iss++;
        WC_UNSHARED: n_unsh_iss++;
        default: n_nonown_iss++;
      endcase
      if (prog[w][i].op == OP_RELSSP) n_relssp++;
      if (prog[w][i].op == OP_SMEM) begin
        int sl; sl = wslot[w];
        if (|iss_lane_shared[s]) begin
          int k; k = (sl < cfg.p_pairs) ? sl : sl - cfg.m_base;
          n_shared_acc++;
          check(lock[k].held && lock[k].owner == SLOT_W'(sl),
                $sformatf("shared access of slot %0d only with the lock", sl));
        end else n_private_acc++;
        for (int l = 0; l < L; l++) begin
          int a, tag;
          a = iss_phys[s][l];
          // shared bytes are tagged by pair, private bytes by slot
          tag = iss_lane_shared[s][l] ? 100 + ((sl < cfg.p_pairs) ? sl : sl - cfg.m_base) : sl;
          check(owner_of_byte[a] < 0 || owner_of_byte[a] == tag,
                $sformatf("byte %0d used by region %0d and %0d", a, owner_of_byte[a], tag));
          owner_of_byte[a] = tag;
        end
      end
    end
    for (int k = 0; k < NT/2; k++) begin
      if (ev_acquire[k]) n_acquire++;
      if (ev_transfer[k]) n_transfer++;
      if (ev_release[k]) begin
        if (tb_done[lock[k].owner]) n_rel_finish++; else n_rel_relssp++;
      end
    end
    n_lock_wait += $countones(lock_wait);
    n_stall += $countones(sched_stall);
    // writebacks due this cycle, at most NB
    wb_valid = '0;
    for (int b = 0; b < NB; b++) begin wb_warp[b] = '0; wb_reg[b] = '0; end
    begin
      int b; b = 0;
      for (int q = 0; q < wbq_c.size(); q++)
        if (wbq_c[q] <= cycle && b < NB) begin
          wb_valid[b] = 1; wb_warp[b] = WARP_W'(wbq_w[q]); wb_reg[b] = REG_W'(wbq_r[q]);
          wbq_c.delete(q); wbq_w.delete(q); wbq_r.delete(q); q--; b++;
        end
    end
  endtask

  task automatic next_cycle;
    @(negedge clk);
    sample_cycle();
    @(posedge clk); #1;
    cycle++;
    tb_launch_valid = 0;
    for (int w = 0; w < NW; w++) begin pc[w] += pend_pc_inc[w]; pend_pc_inc[w] = 0; end
  endtask

  task automatic launch(input int slot, input int warp0, input int threads);
    tb_launch_valid = 1; tb_launch_slot = SLOT_W'(slot);
    tb_launch_warp0 = WARP_W'(warp0); tb_launch_threads = threads;
    for (int w = warp0; w < warp0 + (threads + L - 1) / L; w++) begin
      pc[w] = 0; wslot[w] = slot;
    end
    next_cycle();
  endtask

  task automatic configure(input int r);
    cfg_smem_per_tb = SIZE_W'(r); cfg_tb_limit = 16; cfg_load = 1;
    next_cycle(); cfg_load = 0; next_cycle();
    for (int a = 0; a < 16384; a++) owner_of_byte[a] = -1;
  endtask

  // ---------------------------------------------------------------- main
  int blocks_launched, blocks_done, slot_block [NT];
  initial begin
    for (int w = 0; w < NW; w++) begin
      plen[w] = 0; pc[w] = 0; go[w] = 0; wslot[w] = 0; pend_pc_inc[w] = 0;
      for (int i = 0; i < PMAX; i++) begin prog[w][i] = mk(OP_ALU, -1, -1, -1, 1); issue_cycle[w][i] = -1; end
    end
    wb_valid = '0;
    for (int b = 0; b < NB; b++) begin wb_warp[b] = '0; wb_reg[b] = '0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // ===================== part 1: the OWF example ======================
    configure(2176);
    check(cfg.m_base == 7 && cfg.p_pairs == 5 && cfg.n_res == 12 && shsm, "2176-byte kernel: 7 -> 12 blocks");
    // O: slot 0 (warp 0), N: slot 7 (warp 4), U: slot 5 (warp 8): all on unit 0
    foreach (wslot[w]) wslot[w] = 0;
    for (int w = 0; w <= 8; w += 4) begin
      int b; b = (w == 0) ? 1 : 0;        // O starts with a warm-up access
      prog[w][0]     = mk(OP_SMEM, -1, -1, -1, 1, 1000);
      prog[w][b + 0] = mk(OP_ALU, 1, -1, -1, 1);            // I1 mov R1,0
      prog[w][b + 1] = mk(OP_SMEM, 2, -1, -1, 5, 1000);     // I2 ld R2,S[a]
      prog[w][b + 2] = mk(OP_ALU, 3, 1, 2, 1);              // I3 add R3,R1,R2
      prog[w][b + 3] = mk(OP_EXIT, -1, -1, -1, 1);
      plen[w] = b + 4;
    end
    launch(0, 0, 32); launch(7, 4, 32); launch(5, 8, 32);
    go[0] = 1;
    begin
      int t_go; t_go = cycle;
      while (pc[0] == 0 && cycle < t_go + 20) begin
        if (pc[0] == 0 && issue_cycle[0][0] >= 0) go[0] = 0;
        next_cycle();
      end
      go[0] = 0;
      check(issue_cycle[0][0] == t_go + 1, $sformatf("free lock: request, then issue one cycle later (%0d)", issue_cycle[0][0] - t_go));
    end
    repeat (3) next_cycle();
    check(lock[0].held && lock[0].owner == 0 && owner[0] && !owner[4], "O's block holds pair 0");
    begin
      int t0;
      int exp_o [4] = '{0, 1, 6, 7};
      int exp_u [4] = '{2, 3, 8, 10};
      int exp_n [4] = '{4, 9, 14, 15};
      go[0] = 1; go[4] = 1; go[8] = 1;
      t0 = cycle;
      while (cycle < t0 + 30) next_cycle();
      for (int i = 0; i < 4; i++) begin
        check(issue_cycle[0][i + 1] - t0 == exp_o[i], $sformatf("O instr %0d at %0d, want %0d", i + 1, issue_cycle[0][i + 1] - t0, exp_o[i]));
        check(issue_cycle[8][i] - t0 == exp_u[i], $sformatf("U instr %0d at %0d, want %0d", i + 1, issue_cycle[8][i] - t0, exp_u[i]));
        check(issue_cycle[4][i] - t0 == exp_n[i], $sformatf("N instr %0d at %0d, want %0d", i + 1, issue_cycle[4][i] - t0, exp_n[i]));
      end
      check(slot_live == '0, "example blocks finished");
      go[0] = 0; go[4] = 0; go[8] = 0;
    end

    // ===================== part 2: a sharing kernel =====================
    configure(2176);
    blocks_launched = 0; blocks_done = 0;
    foreach (slot_block[s]) slot_block[s] = -1;
    while (blocks_done < 40 && cycle < 15000) begin
      // retire finished blocks
      for (int s = 0; s < NT; s++)
        if (slot_block[s] >= 0 && !slot_live[s] && cycle > 0 && !go_pending(s)) begin
          for (int w = 6 * s; w < 6 * s + 2; w++) begin
            check(pc[w] == plen[w], $sformatf("block %0d warp %0d ran its program", slot_block[s], w));
            go[w] = 0;
          end
          slot_block[s] = -1; blocks_done++;
        end
      // launch into a free slot
      begin
        int fs; fs = -1;
        for (int s = 0; s < cfg.n_res; s++) if (fs < 0 && slot_block[s] < 0 && !slot_live[s]) fs = s;
        if (fs >= 0 && blocks_launched < 40) begin
          int b; b = blocks_launched++;
          for (int w = 6 * fs; w < 6 * fs + 2; w++) begin
            int j; j = w - 6 * fs;
            prog[w][0]  = mk(OP_ALU, 1, -1, -1, 1);
            prog[w][1]  = mk(OP_SMEM, 2, -1, -1, 5, 64);                // private load
            prog[w][2]  = mk(OP_ALU, 3, 1, 2, 1 + $urandom % 30);
            prog[w][3]  = mk(OP_SMEM, -1, 3, -1, 1, 217 + 128 * j);      // shared store
            prog[w][4]  = mk(OP_SMEM, 4, -1, -1, 5, 1000 + 128 * j);     // shared load
            prog[w][5]  = mk(OP_ALU, 5, 4, 3, 1);
            prog[w][6]  = (b % 2 == 0) ? mk(OP_RELSSP, -1, -1, -1, 1) : mk(OP_ALU, 6, -1, -1, 1);
            prog[w][7]  = mk(OP_ALU, 7, 5, -1, 1 + $urandom % 40);
            prog[w][8]  = mk(OP_SMEM, -1, 7, -1, 1, 0);                 // private store
            prog[w][9]  = mk(OP_ALU, 8, 7, -1, 1);
            prog[w][10] = mk(OP_EXIT, -1, -1, -1, 1);
            plen[w] = 11;
          end
          slot_block[fs] = b;
          launch(fs, 6 * fs, 64);
          for (int w = 6 * fs; w < 6 * fs + 2; w++) go[w] = 1;
        end else next_cycle();
      end
    end
    check(blocks_done == 40, $sformatf("all 40 blocks finished (%0d)", blocks_done));
    $display("cycles %0d: acquires %0d, relssp releases %0d, finish releases %0d, transfers %0d",
             cycle, n_acquire, n_rel_relssp, n_rel_finish, n_transfer);
    $display("warp-cycles waiting on a lock %0d, scheduler stall cycles %0d, relssp issued %0d",
             n_lock_wait, n_stall, n_relssp);
    $display("issued: owner %0d, unshared %0d, non-owner %0d; shared accesses %0d, private %0d",
             n_owner_iss, n_unsh_iss, n_nonown_iss, n_shared_acc, n_private_acc);
    check(n_acquire > 0, "lock acquire happened");
    check(n_lock_wait > 0, "a warp waited for the lock");
    check(n_rel_relssp > 0, "relssp released a lock");
    check(n_transfer > 0, "ownership passed at block finish");
    check(n_rel_finish > 0, "lock freed at finish with no partner");
    check(n_stall > 0, "scheduler stall happened");
    check(n_owner_iss > 0 && n_unsh_iss > 0 && n_nonown_iss > 0, "all three warp classes issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit go_pending(input int s);
    return go[6 * s] && pc[6 * s] < plen[6 * s];
  endfunction
endmodule
