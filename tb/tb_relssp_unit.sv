// tb_relssp_unit: per-thread active (A) and release (R) bits, and the
// per-block "all active threads executed relssp" output.  A directed case
// follows one block of 100 threads (3 full warps and one of 4 threads);
// then random relssp/exit/launch traffic is compared with a model that
// keeps its own A and R bits.
module tb_relssp_unit;
  import ssp_pkg::*;
  localparam int NW = MAX_WARPS, NT = MAX_TB, L = WARP_SIZE, NS = NUM_SCHED;
  logic clk = 0, rst_n = 0;
  logic [SLOT_W-1:0] warp_slot [NW];
  logic [NW-1:0] warp_live, warp_init, warp_empty;
  logic [L-1:0] init_active [NW];
  logic [NS-1:0] iss_valid;
  logic [WARP_W-1:0] iss_warp [NS];
  op_e iss_op [NS];
  logic [L-1:0] iss_mask [NS];
  logic [NT-1:0] lock_bit, rel_done;
  logic [L-1:0] ma [NW], mr [NW];   // model
  int checks = 0, failures = 0;

  relssp_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_inputs;
    warp_init = '0; iss_valid = '0;
    for (int s = 0; s < NS; s++) begin iss_warp[s] = '0; iss_op[s] = OP_ALU; iss_mask[s] = '0; end
  endtask

  // apply this cycle's inputs to the model and clock the DUT
  task automatic step;
    for (int s = 0; s < NS; s++)
      if (iss_valid[s]) begin
        if (iss_op[s] == OP_RELSSP) mr[iss_warp[s]] |= iss_mask[s] & ma[iss_warp[s]];
        if (iss_op[s] == OP_EXIT)   ma[iss_warp[s]] &= ~iss_mask[s];
      end
    for (int w = 0; w < NW; w++) if (warp_init[w]) begin ma[w] = init_active[w]; mr[w] = '0; end
    @(posedge clk); #1;
    clear_inputs();
  endtask

  task automatic compare(input string tag);
    for (int t = 0; t < NT; t++) begin
      logic all;
      all = 1;
      for (int w = 0; w < NW; w++)
        if (warp_live[w] && warp_slot[w] == SLOT_W'(t))
          for (int l = 0; l < L; l++) if (ma[w][l] && !mr[w][l]) all = 0;
      checks++;
      if (rel_done[t] !== all || lock_bit[t] !== !all) begin
        failures++; $display("FAIL %s slot %0d rel_done=%0d want %0d", tag, t, rel_done[t], all);
      end
    end
    for (int w = 0; w < NW; w++) begin
      checks++;
      if (warp_empty[w] !== (ma[w] == '0)) begin failures++; $display("FAIL %s empty %0d", tag, w); end
    end
  endtask

  initial begin
    clear_inputs();
    for (int w = 0; w < NW; w++) begin warp_slot[w] = SLOT_W'(w / 6); init_active[w] = '0; ma[w] = '0; mr[w] = '0; end
    warp_live = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // block of 100 threads in slot 2: warps 12..15
    for (int w = 12; w < 16; w++) begin
      warp_init[w] = 1; warp_live[w] = 1;
      init_active[w] = (w == 15) ? 32'h0000_000f : '1;
    end
    step;
    compare("launch");
    checks++; if (rel_done[2]) begin failures++; $display("FAIL: released before relssp"); end
    for (int w = 12; w < 15; w++) begin
      iss_valid[0] = 1; iss_warp[0] = WARP_W'(w); iss_op[0] = OP_RELSSP; iss_mask[0] = '1;
      step;
    end
    iss_valid[1] = 1; iss_warp[1] = 15; iss_op[1] = OP_RELSSP; iss_mask[1] = 32'h3; step;
    compare("partial");
    checks++; if (rel_done[2] || !lock_bit[2]) begin failures++; $display("FAIL: two threads still to release"); end
    // the two remaining threads exit instead: all active threads released
    iss_valid[2] = 1; iss_warp[2] = 15; iss_op[2] = OP_EXIT; iss_mask[2] = 32'hc; step;
    compare("exit");
    checks++; if (!rel_done[2] || lock_bit[2]) begin failures++; $display("FAIL: block should be released"); end
    // random traffic on warps 0..47
    for (int w = 0; w < 48; w++) warp_live[w] = 1;
    for (int i = 0; i < 400; i++) begin
      for (int s = 0; s < NS; s++)
        if ($urandom % 2) begin
          iss_valid[s] = 1;
          iss_warp[s]  = WARP_W'(($urandom % 12) * NS + s);  // distinct per unit
          iss_op[s]    = ($urandom % 3 == 0) ? OP_EXIT : OP_RELSSP;
          iss_mask[s]  = $urandom;
        end
      if ($urandom % 8 == 0) begin
        int w; w = $urandom % 48;
        warp_init[w] = 1; init_active[w] = $urandom;
      end
      step;
      compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
