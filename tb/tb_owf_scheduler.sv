// tb_owf_scheduler: Owner Warp First order.  Directed cases put one ready
// warp of each class in the unit; random cases compare with a reference
// that sorts the ready warps by class and then by round-robin distance from
// the last issued warp.
module tb_owf_scheduler;
  import ssp_pkg::*;
  localparam int NW = MAX_WARPS / NUM_SCHED;
  localparam int IW = $clog2(NW);
  logic clk = 0, rst_n = 0;
  logic [NW-1:0] cand, ready;
  warp_class_e wclass [NW];
  logic issue_valid, stall;
  logic [IW-1:0] issue_idx;
  warp_class_e issue_class;
  int checks = 0, failures = 0, last;

  owf_scheduler dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_issue(input int idx, input string what);
    int best, bestkey;
    #1;
    checks++;
    if (idx < 0) begin
      if (issue_valid || stall !== (|cand)) begin failures++; $display("FAIL %s: issued %0d", what, issue_idx); end
    end else if (!issue_valid || issue_idx != IW'(idx) || issue_class != wclass[idx] || stall) begin
      failures++; $display("FAIL %s: issued %0d valid %0d, want %0d", what, issue_idx, issue_valid, idx);
    end
    @(posedge clk); #1;
    if (idx >= 0) last = idx;
  endtask

  function automatic int reference();
    int best, bestkey;
    best = -1; bestkey = 1 << 30;
    for (int i = 0; i < NW; i++)
      if (cand[i] && ready[i]) begin
        int key;
        key = int'(wclass[i]) * NW + ((i - last - 1 + 2 * NW) % NW);
        if (key < bestkey) begin bestkey = key; best = i; end
      end
    return best;
  endfunction

  initial begin
    cand = '0; ready = '0; last = NW - 1;
    for (int i = 0; i < NW; i++) wclass[i] = WC_UNSHARED;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // warp 0 unshared, 1 owner, 2 non-owner, all ready: owner goes first
    cand[2:0] = '1; ready[2:0] = '1;
    wclass[0] = WC_UNSHARED; wclass[1] = WC_OWNER; wclass[2] = WC_NONOWNER;
    expect_issue(1, "owner first");
    ready[1] = 0; expect_issue(0, "unshared second");
    ready[0] = 0; expect_issue(2, "non-owner last");
    ready[2] = 0; expect_issue(-1, "nothing ready: stall");
    // two owners: round robin between them
    wclass[5] = WC_OWNER; wclass[9] = WC_OWNER; cand[5] = 1; cand[9] = 1;
    ready[5] = 1; ready[9] = 1;
    expect_issue(5, "owner after pointer"); expect_issue(9, "round robin owner");
    expect_issue(5, "round robin wraps");
    for (int n = 0; n < 1000; n++) begin
      cand = {$urandom, $urandom}; ready = {$urandom, $urandom};
      for (int i = 0; i < NW; i++) wclass[i] = warp_class_e'($urandom % 3);
      expect_issue(reference(), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
