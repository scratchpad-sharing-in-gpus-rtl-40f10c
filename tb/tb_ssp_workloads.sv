// tb_ssp_workloads: the kernels of the evaluation, by their scratchpad
// size and block size, run through the scratchpad-sharing SM logic at its
// default sizes (16 KB, 16 blocks, 96 warps, 4 scheduler units).
//
// For every kernel the bench configures the SM, checks the resident block
// counts (unshared m and shared n, as the evaluation reports them), then
// runs 3n blocks of a synthetic program twice: once with sharing and once
// limited to the baseline m blocks (no sharing).  Kernels whose shared
// region can be released early run a program with relssp after the last
// shared access; the others touch the shared region until their end.  The
// program bodies are synthetic: the real kernels' instruction streams are
// not modelled, so the cycle counts printed are not the evaluation's.
// Checked: shared accesses only by the lock holder, no byte used by two
// regions, every block completes, relssp releases where used.
module tb_ssp_workloads;
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
    repeat (400000) @(posedge clk);
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
  int slot_block [NT];

  task automatic run_kernel(input string name, input int r, input int bs, input bit set1,
                            input int limit, input int nblocks, output int cyc);
    int wpb, launched, done, t0, rel0;
    wpb = (bs + L - 1) / L;
    cfg_smem_per_tb = SIZE_W'(r); cfg_tb_limit = CNT_W'(limit); cfg_load = 1;
    next_cycle(); cfg_load = 0; next_cycle();
    for (int a = 0; a < 16384; a++) owner_of_byte[a] = -1;
    foreach (slot_block[s]) slot_block[s] = -1;
    launched = 0; done = 0; t0 = cycle; rel0 = n_rel_relssp;
    while (done < nblocks && cycle < t0 + 40000) begin
      for (int s = 0; s < NT; s++)
        if (slot_block[s] >= 0 && !slot_live[s]) begin
          for (int w = wpb * s; w < wpb * s + wpb; w++) begin
            if (pc[w] != plen[w]) begin
              failures++; $display("FAIL %s: block %0d warp %0d stopped at %0d", name, slot_block[s], w, pc[w]);
            end
            go[w] = 0;
          end
          checks++;
          slot_block[s] = -1; done++;
        end
      begin
        int fs; fs = -1;
        for (int s = 0; s < cfg.n_res; s++) if (fs < 0 && slot_block[s] < 0 && !slot_live[s]) fs = s;
        if (fs >= 0 && launched < nblocks) begin
          int b; b = launched++;
          for (int w = wpb * fs; w < wpb * fs + wpb; w++) begin
            int j, sh; j = w - wpb * fs;
            // shared offsets: spread over the upper part of the block
            sh = r / 10 + ((j * 128) % (r - r / 10 - 128));
            prog[w][0]  = mk(OP_ALU, 1, -1, -1, 1);
            prog[w][1]  = mk(OP_SMEM, 2, -1, -1, 5, 0);
            prog[w][2]  = mk(OP_ALU, 3, 1, 2, 1 + $urandom % 20);
            prog[w][3]  = mk(OP_SMEM, -1, 3, -1, 1, sh);
            prog[w][4]  = mk(OP_SMEM, 4, -1, -1, 5, sh);
            prog[w][5]  = mk(OP_ALU, 5, 4, 3, 1);
            if (set1) begin
              prog[w][6] = mk(OP_RELSSP, -1, -1, -1, 1);
              prog[w][7] = mk(OP_ALU, 6, 5, -1, 1 + $urandom % 40);
              prog[w][8] = mk(OP_ALU, 7, 6, -1, 1 + $urandom % 40);
            end else begin
              prog[w][6] = mk(OP_ALU, 6, 5, -1, 1 + $urandom % 40);
              prog[w][7] = mk(OP_ALU, 7, 6, -1, 1 + $urandom % 40);
              prog[w][8] = mk(OP_SMEM, -1, 7, -1, 1, sh);
            end
            prog[w][9]  = mk(OP_SMEM, -1, 7, -1, 1, 0);
            prog[w][10] = mk(OP_EXIT, -1, -1, -1, 1);
            plen[w] = 11;
          end
          slot_block[fs] = b;
          launch(fs, wpb * fs, bs);
          for (int w = wpb * fs; w < wpb * fs + wpb; w++) go[w] = 1;
        end else next_cycle();
      end
    end
    cyc = cycle - t0;
    checks++;
    if (done != nblocks) begin failures++; $display("FAIL %s: %0d of %0d blocks finished", name, done, nblocks); end
    if (set1 && cfg.shsm) begin
      checks++;
      if (n_rel_relssp == rel0) begin failures++; $display("FAIL %s: no relssp release", name); end
    end
  endtask

  task automatic kernel(input string name, input int r, input int bs, input bit set1,
                        input int exp_m, input int exp_n);
    int lim, c_sh, c_base;
    lim = 3072 / bs; if (lim > 16) lim = 16;
    cfg_smem_per_tb = SIZE_W'(r); cfg_tb_limit = CNT_W'(lim); cfg_load = 1;
    next_cycle(); cfg_load = 0; next_cycle();
    checks++;
    if (cfg.m_base != CNT_W'(exp_m) || cfg.n_res != CNT_W'(exp_n)) begin
      failures++; $display("FAIL %s: m=%0d n=%0d, want %0d and %0d", name, cfg.m_base, cfg.n_res, exp_m, exp_n);
    end
    run_kernel(name, r, bs, set1, lim, 3 * exp_n, c_sh);
    run_kernel(name, r, bs, set1, exp_m, 3 * exp_n, c_base);
    $display("%-10s R_tb=%5d block=%3d  blocks %0d -> %0d  cycles: baseline %0d, sharing %0d",
             name, r, bs, exp_m, exp_n, c_base, c_sh);
  endtask

  initial begin
    for (int w = 0; w < NW; w++) begin
      plen[w] = 0; pc[w] = 0; go[w] = 0; wslot[w] = 0; pend_pc_inc[w] = 0;
      for (int i = 0; i < PMAX; i++) begin prog[w][i] = mk(OP_ALU, -1, -1, -1, 1); issue_cycle[w][i] = -1; end
    end
    wb_valid = '0;
    for (int b = 0; b < NB; b++) begin wb_warp[b] = '0; wb_reg[b] = '0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // shared region releasable early (relssp)
    kernel("backprop",  9408, 256, 1, 1, 2);
    kernel("DCT1",      2112,  64, 1, 7, 14);
    kernel("DCT3",      2176, 128, 1, 7, 12);
    kernel("NQU",      10496,  64, 1, 1, 2);
    kernel("SRAD1",    13824, 576, 1, 1, 2);
    kernel("SRAD2",    11520, 576, 1, 1, 2);
    // shared region used to the end
    kernel("FDTD3d",    3840, 128, 0, 4, 6);
    kernel("heartwall",11872, 128, 0, 1, 2);
    kernel("histogram", 9216, 192, 0, 1, 2);
    kernel("MC1",       9216,  32, 0, 1, 2);
    kernel("nw",        8452,  32, 0, 1, 2);
    // additional 16 KB kernels
    kernel("kmeans",    4608, 576, 0, 3, 5);
    kernel("lud",       3872, 484, 0, 4, 6);
    $display("totals: acquires %0d, relssp releases %0d, hand-overs %0d, lock-wait warp-cycles %0d",
             n_acquire, n_rel_relssp, n_transfer, n_lock_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
