// tb_sharing_planner: checks the block counts chosen at kernel launch.
// The expected values come from a brute-force search over p in the bench,
// and the two worked examples with 16 KB: R_tb = 2176 bytes gives 7 blocks
// unshared and 12 with sharing (5 pairs); R_tb = 9408 bytes gives 1 and 2.
module tb_sharing_planner;
  import ssp_pkg::*;
  logic clk = 0, rst_n = 0, cfg_load = 0;
  logic [SIZE_W-1:0] smem;
  logic [CNT_W-1:0]  lim;
  ssp_cfg_t cfg;
  int checks = 0, failures = 0;

  sharing_planner dut (.clk, .rst_n, .cfg_load, .smem_per_tb(smem), .tb_limit(lim), .cfg);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int r, input int l, input int exp_m = -1, input int exp_n = -1);
    int m, u, bp;
    smem = SIZE_W'(r); lim = CNT_W'(l);
    cfg_load = 1; @(posedge clk); #1 cfg_load = 0;
    // independent reference: search every p
    m  = 16384 / r; if (m > l) m = l;
    u  = r / 10;
    bp = 0;
    for (int p = 0; p <= m; p++)
      if (m + p <= l && m * r + p * u <= 16384 && u > 0) bp = p;
    checks++;
    if (cfg.m_base !== CNT_W'(m) || cfg.p_pairs !== CNT_W'(bp) ||
        cfg.n_res !== CNT_W'(m + bp) || cfg.shsm !== (bp > 0) ||
        (bp > 0 && cfg.u_bytes !== SIZE_W'(u))) begin
      failures++;
      $display("FAIL R=%0d lim=%0d: got m=%0d p=%0d n=%0d shsm=%0d, want m=%0d p=%0d",
               r, l, cfg.m_base, cfg.p_pairs, cfg.n_res, cfg.shsm, m, bp);
    end
    if (exp_m >= 0) begin
      checks++;
      if (cfg.m_base != CNT_W'(exp_m) || cfg.n_res != CNT_W'(exp_n)) begin
        failures++;
        $display("FAIL example R=%0d: m=%0d n=%0d, want %0d and %0d", r, cfg.m_base, cfg.n_res, exp_m, exp_n);
      end
    end
  endtask

  initial begin
    smem = '0; lim = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (cfg.shsm !== 1'b0 || cfg.n_res !== '0) begin failures++; $display("FAIL reset"); end
    run(2176, 16, 7, 12);       // DCT3 example
    run(9408, 16, 1, 2);        // backprop example
    // the other kernels of the first two benchmark sets
    run(2112, 16); run(10496, 16); run(13824, 16); run(11520, 16);
    run(3840, 16); run(11872, 16); run(9216, 16); run(8452, 16);
    // a limit set by threads: 3072 threads / 576 per block = 5 blocks
    run(13824, 5);
    run(2112, 7);               // other resources limit: no sharing
    run(1000, 16);              // block limit reached without sharing
    for (int i = 0; i < 300; i++)
      run(1 + ($urandom % 16384), 1 + ($urandom % 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
