// tb_storage_units: ShTB contents, first-come-first-served lock grant,
// release by relssp, ownership transfer at block finish, Owner bits.
// Configuration: 7 blocks fit unshared, 5 pairs, 12 resident (slot j<5
// pairs with slot 7+j).  Warp w (w < 12) belongs to slot w.
module tb_storage_units;
  import ssp_pkg::*;
  localparam int NW = MAX_WARPS, NT = MAX_TB;
  logic clk = 0, rst_n = 0, cfg_write = 0;
  ssp_cfg_t cfg;
  logic [SLOT_W-1:0] warp_slot [NW];
  logic [NW-1:0] warp_live, acq_req, owner;
  logic [NT-1:0] slot_live, rel_done, tb_finish;
  logic shsm;
  logic [SHTB_W-1:0] shtb [NT];
  lock_t lock [NT/2];
  logic [NT/2-1:0] ev_acquire, ev_release, ev_transfer;
  int checks = 0, failures = 0;

  storage_units dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step; @(posedge clk); #1; endtask

  initial begin
    cfg = '0; cfg.shsm = 1; cfg.r_tb = 2176; cfg.u_bytes = 217;
    cfg.m_base = 7; cfg.p_pairs = 5; cfg.n_res = 12;
    for (int w = 0; w < NW; w++) warp_slot[w] = SLOT_W'(w % 12);
    warp_live = '0; warp_live[11:0] = '1;
    slot_live = '0; slot_live[11:0] = '1;
    acq_req = '0; rel_done = '0; tb_finish = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    cfg_write = 1; step; cfg_write = 0;
    check(shsm == 1'b1, "ShSM set");
    for (int j = 0; j < NT; j++) begin
      logic [SHTB_W-1:0] e;
      e = (j < 5) ? SHTB_W'(7 + j) : (j >= 7 && j < 12) ? SHTB_W'(j - 7) : NO_PARTNER;
      check(shtb[j] == e, $sformatf("ShTB[%0d]=%0d want %0d", j, shtb[j], e));
    end
    for (int k = 0; k < NT/2; k++) check(!lock[k].held, "locks free after config");

    // two blocks of pair 0 ask in the same cycle: lower warp id wins
    acq_req[7] = 1; acq_req[0] = 1;
    #0 check(ev_acquire[0] == 1'b1, "acquire event");
    step;
    acq_req = '0;
    check(lock[0].held && lock[0].owner == 0, "slot 0 holds pair 0");
    check(owner[0] && !owner[7], "owner bit of warp 0 only");
    // the partner asks later: lock stays where it is (FCFS)
    acq_req[7] = 1; step; acq_req = '0;
    check(lock[0].held && lock[0].owner == 0, "held lock not taken");
    // relssp completion of the non-holder has no effect
    rel_done[7] = 1; step; rel_done = '0;
    check(lock[0].held && lock[0].owner == 0, "non-holder release ignored");
    // holder completes relssp: lock freed
    rel_done[0] = 1; #0 check(ev_release[0], "release event"); step; rel_done = '0;
    check(!lock[0].held, "released by relssp");
    check(!owner[0], "owner bit cleared");
    // partner now takes it
    acq_req[7] = 1; step; acq_req = '0;
    check(lock[0].held && lock[0].owner == 7, "slot 7 holds pair 0");
    check(owner[7], "owner bit of warp 7");
    // holder finishes while partner is live: ownership moves
    tb_finish[7] = 1; #0 check(ev_transfer[0], "transfer event"); step; tb_finish = '0;
    check(lock[0].held && lock[0].owner == 0, "ownership passed to slot 0");
    // holder finishes while partner slot is empty: lock freed
    slot_live[7] = 0; warp_live[7] = 0;
    tb_finish[0] = 1; step; tb_finish = '0;
    check(!lock[0].held, "freed when partner slot empty");
    // independent pairs: pair 3 (slots 3 and 10) and pair 4 (slots 4, 11)
    acq_req[10] = 1; acq_req[4] = 1; step; acq_req = '0;
    check(lock[3].held && lock[3].owner == 10, "pair 3 held by slot 10");
    check(lock[4].held && lock[4].owner == 4, "pair 4 held by slot 4");
    // slot 5 shares with nobody: no lock changes
    acq_req[5] = 1; step; acq_req = '0;
    check(!lock[5].held && !lock[6].held, "unshared slot takes no lock");
    // reconfiguring frees everything
    cfg.shsm = 0; cfg.p_pairs = 0; cfg_write = 1; step; cfg_write = 0;
    check(!shsm && !lock[3].held && shtb[0] == NO_PARTNER, "config clears state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
