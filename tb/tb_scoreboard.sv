// tb_scoreboard: register hazards.  Directed: a load writing R2 blocks a
// following add reading R2 until the writeback (the dependence of the warp
// scheduling example); then random issue/writeback traffic against a model.
module tb_scoreboard;
  import ssp_pkg::*;
  localparam int NW = MAX_WARPS, NS = NUM_SCHED, NB = WB_PORTS;
  logic clk = 0, rst_n = 0;
  logic [NW-1:0] warp_init, ready;
  logic [NS-1:0] iss_valid;
  logic [WARP_W-1:0] iss_warp [NS];
  reg_ref_t iss_dst [NS];
  logic [NB-1:0] wb_valid;
  logic [WARP_W-1:0] wb_warp [NB];
  logic [REG_W-1:0] wb_reg [NB];
  instr_t chk [NW];
  logic [NUM_REGS-1:0] mp [NW];
  int checks = 0, failures = 0;

  scoreboard dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_inputs;
    warp_init = '0; iss_valid = '0; wb_valid = '0;
    for (int s = 0; s < NS; s++) begin iss_warp[s] = '0; iss_dst[s] = '0; end
    for (int b = 0; b < NB; b++) begin wb_warp[b] = '0; wb_reg[b] = '0; end
  endtask

  task automatic step;
    for (int b = 0; b < NB; b++) if (wb_valid[b]) mp[wb_warp[b]][wb_reg[b]] = 0;
    for (int s = 0; s < NS; s++) if (iss_valid[s] && iss_dst[s].v) mp[iss_warp[s]][iss_dst[s].r] = 1;
    for (int w = 0; w < NW; w++) if (warp_init[w]) mp[w] = '0;
    @(posedge clk); #1;
    clear_inputs();
  endtask

  task automatic compare;
    for (int w = 0; w < NW; w++) begin
      logic e;
      e = !(chk[w].src1.v && mp[w][chk[w].src1.r]) && !(chk[w].src2.v && mp[w][chk[w].src2.r]) &&
          !(chk[w].dst.v && mp[w][chk[w].dst.r]);
      checks++;
      if (ready[w] !== e) begin failures++; $display("FAIL warp %0d ready=%0d want %0d", w, ready[w], e); end
    end
  endtask

  initial begin
    clear_inputs();
    for (int w = 0; w < NW; w++) begin chk[w] = '0; mp[w] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    warp_init = '1; step;
    // warp 5: ld R2 issued, next is add R3, R1, R2
    iss_valid[1] = 1; iss_warp[1] = 5; iss_dst[1] = '{v: 1, r: 2}; step;
    chk[5].op = OP_ALU; chk[5].dst = '{v: 1, r: 3}; chk[5].src1 = '{v: 1, r: 1}; chk[5].src2 = '{v: 1, r: 2};
    #1 checks++; if (ready[5]) begin failures++; $display("FAIL: RAW on R2 not seen"); end
    checks++; if (!ready[6]) begin failures++; $display("FAIL: other warp blocked"); end
    wb_valid[2] = 1; wb_warp[2] = 5; wb_reg[2] = 2; step;
    checks++; if (!ready[5]) begin failures++; $display("FAIL: R2 not cleared by writeback"); end
    for (int i = 0; i < 300; i++) begin
      for (int s = 0; s < NS; s++) if ($urandom % 2) begin
        iss_valid[s] = 1; iss_warp[s] = WARP_W'(($urandom % 24) * NS + s);
        iss_dst[s] = '{v: ($urandom % 4 != 0), r: REG_W'($urandom)};
      end
      for (int b = 0; b < NB; b++) if ($urandom % 2) begin
        wb_valid[b] = 1; wb_warp[b] = WARP_W'($urandom % NW); wb_reg[b] = REG_W'($urandom % 8);
      end
      if ($urandom % 16 == 0) warp_init[$urandom % NW] = 1;
      for (int w = 0; w < NW; w++) begin
        chk[w].src1 = '{v: $urandom % 2, r: REG_W'($urandom % 8)};
        chk[w].src2 = '{v: $urandom % 2, r: REG_W'($urandom % 8)};
        chk[w].dst  = '{v: $urandom % 2, r: REG_W'($urandom % 8)};
      end
      #1 compare();
      step;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
