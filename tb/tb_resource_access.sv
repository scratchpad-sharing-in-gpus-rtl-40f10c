// tb_resource_access: the access check (unshared block, private offset,
// shared offset with or without the lock) and the offset-to-address map.
// The bench builds its own placement of every region by allocating them
// one after another (pair by pair, then the unshared blocks) and checks
// random offsets of every slot against it, and that the regions fit.
module tb_resource_access;
  import ssp_pkg::*;
  localparam int NT = MAX_TB, L = WARP_SIZE;
  ssp_cfg_t cfg;
  logic shsm, is_smem, unshared_tb, need_lock, has_lock, ready, acq_req;
  logic [SLOT_W-1:0] slot;
  logic [SHTB_W-1:0] shtb_entry;
  lock_t lock [NT/2];
  logic [L-1:0] mask, lane_shared;
  logic [ADDR_W-1:0] offset [L], phys [L];
  int checks = 0, failures = 0;
  int priv_at [NT], shared_at [NT/2];

  resource_access dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [SHTB_W-1:0] partner(input int j);
    int m, p; m = cfg.m_base; p = cfg.p_pairs;
    if (!cfg.shsm) return NO_PARTNER;
    if (j < p) return SHTB_W'(m + j);
    if (j >= m && j < m + p) return SHTB_W'(j - m);
    return NO_PARTNER;
  endfunction

  task automatic setup(input int r, input int u, input int m, input int p);
    int cur;
    cfg = '0; cfg.r_tb = SIZE_W'(r); cfg.u_bytes = SIZE_W'(u); cfg.m_base = CNT_W'(m);
    cfg.p_pairs = CNT_W'(p); cfg.n_res = CNT_W'(m + p); cfg.shsm = (p > 0); shsm = cfg.shsm;
    cur = 0;
    for (int k = 0; k < p; k++) begin
      priv_at[k] = cur;     cur += u;
      priv_at[m + k] = cur; cur += u;
      shared_at[k] = cur;   cur += r - u;
    end
    for (int j = p; j < m; j++) begin priv_at[j] = cur; cur += r; end
    check(cur <= 16384, $sformatf("layout of R=%0d fits (%0d bytes)", r, cur));
    for (int k = 0; k < NT/2; k++) lock[k] = '0;
  endtask

  // one warp access of slot j: random offsets, compare every lane
  task automatic access(input int j, input int r, input int u, input int max_off);
    int pk;
    slot = SLOT_W'(j); shtb_entry = partner(j); is_smem = 1; mask = $urandom;
    for (int l = 0; l < L; l++) offset[l] = ADDR_W'($urandom % max_off);
    #1;
    for (int l = 0; l < L; l++) begin
      logic sh; int exp_addr;
      sh = (shtb_entry != NO_PARTNER) && offset[l] >= u;
      pk = (j < cfg.p_pairs) ? j : j - cfg.m_base;
      exp_addr = sh ? shared_at[pk] + offset[l] - u : priv_at[j] + offset[l];
      check(lane_shared[l] == sh && phys[l] == ADDR_W'(exp_addr),
            $sformatf("slot %0d off %0d: addr %0d want %0d", j, offset[l], phys[l], exp_addr));
    end
    check(need_lock == |(lane_shared & mask), "need_lock");
  endtask

  initial begin
    for (int l = 0; l < L; l++) offset[l] = '0;
    // 2176-byte blocks: m = 7, p = 5, t*R = 217
    setup(2176, 217, 7, 5);
    // directed: slot 2 (pair 2), private and shared offsets
    slot = 2; shtb_entry = partner(2); is_smem = 1; mask = 32'h1;
    offset[0] = 100; #1;
    check(!unshared_tb && !need_lock && ready && !acq_req, "private offset passes");
    check(phys[0] == ADDR_W'(2 * 2393 + 100), "private address of slot 2");
    offset[0] = 216; #1; check(!need_lock, "offset t*R-1 is private");
    offset[0] = 217; #1; check(need_lock && !ready && acq_req, "offset t*R is shared; free lock requested");
    offset[0] = 1000; #1;
    check(phys[0] == ADDR_W'(2 * 2393 + 434 + 783), "shared address of pair 2");
    lock[2] = '{held: 1, owner: 2}; #1;
    check(ready && has_lock && !acq_req, "holder may access");
    slot = 9; shtb_entry = partner(9); #1;
    check(!ready && !acq_req && need_lock, "partner waits, no request while held");
    is_smem = 0; #1; check(ready, "non-scratchpad instruction passes");
    is_smem = 1; mask = '0; #1; check(ready, "no active lane passes");
    slot = 5; shtb_entry = partner(5); mask = '1; offset[0] = 2000; #1;
    check(unshared_tb && ready && !need_lock, "unshared block passes");
    check(phys[0] == ADDR_W'(5 * 2393 + 2000), "unshared block address");
    for (int i = 0; i < 200; i++) access($urandom % 12, 2176, 217, 2176);
    // 9408-byte blocks: m = 1, p = 1
    setup(9408, 940, 1, 1);
    for (int i = 0; i < 100; i++) access($urandom % 2, 9408, 940, 9408);
    // no sharing: block j at j*R_tb
    setup(3000, 3000, 5, 0);
    for (int i = 0; i < 100; i++) access($urandom % 5, 3000, 3000, 3000);
    check(!need_lock, "no lock without sharing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
