// incr_scheduler_tb: runs the first example block of the EDGE overview
// through the incremental scheduler.
//   I0 READ R0 -> I2.R   I1 READ R7 -> I2.L   I2 ADD -> I3.L
//   I3 TLEI #5 -> B1.P   I4 BRO.T (B1)        I5 BRO.F (B1)
// Checks the issue order and that READ, READ, ADD, TLEI issue in
// consecutive cycles (the one-cycle ready-issue-target-ready recurrence).
// The test result is then delivered as a broadcast (true): the broadcast
// queue wakes BRO.T, and BRO.F never issues. A refresh replays the block
// without decoding it; a load/store release issues from LSRDYQ.
module incr_scheduler_tb;
  import edge_pkg::*;
  import edge_asm_pkg::*;
  logic clk = 0, rst = 1, blk_reset = 0, blk_refresh = 0, issue_en = 1;
  logic dc_we [2]; decoded_t dc_d [2]; rdys_t dc_drdys [2];
  logic late_v [2]; iid_t late_iid [2]; rdys_t late_rdys [2];
  logic bc_fire = 0; logic [1:0] bc_chan = 0; rdys_t bc_rdys = 0;
  logic ls_rel = 0; iid_t ls_rel_iid = 0;
  decoded_t insn; logic insn_valid, insn_from_ls, o_both_ready, o_bc_drain, o_ev_stall;
  int checks = 0, failures = 0, cyc = 0;
  incr_scheduler dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // decode with the real decoder
  logic [31:0] prog [6];
  iid_t di [2]; logic [31:0] draw [2];
  decoder u_d0 (.iid(di[0]), .raw(draw[0]), .d(dc_d[0]), .drdys(dc_drdys[0]));
  decoder u_d1 (.iid(di[1]), .raw(draw[1]), .d(dc_d[1]), .drdys(dc_drdys[1]));

  int issued [$]; int issue_cyc [$];
  always @(posedge clk) if (insn_valid) begin issued.push_back(int'(insn.iid)); issue_cyc.push_back(cyc); end

  task automatic chk(int got, int exp, string s);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask

  initial begin
    prog[0] = read(0, tR(2)); prog[1] = read(7, tL(2)); prog[2] = ins(OP_ADD, TNONE, tL(3));
    prog[3] = insi(OP_TLEI, 5, tB(1, 1)); prog[4] = bro(3, PR_T, 1); prog[5] = bro(9, PR_F, 1);
    for (int k = 0; k < 2; k++) begin dc_we[k] = 0; late_v[k] = 0; late_iid[k] = 0; late_rdys[k] = 0;
      di[k] = 0; draw[k] = 0; end
    @(negedge clk); rst = 0; blk_reset = 1; @(negedge clk); blk_reset = 0;
    for (int p = 0; p < 3; p++) begin
      dc_we[0] = 1; dc_we[1] = 1; di[0] = 5'(2*p); di[1] = 5'(2*p+1);
      draw[0] = prog[2*p]; draw[1] = prog[2*p+1];
      @(negedge clk);
    end
    dc_we[0] = 0; dc_we[1] = 0;
    repeat (6) @(negedge clk);
    chk(issued.size(), 4, "issued before predicate");
    if (issued.size() >= 4) begin
      chk(issued[0], 0, "1st READ"); chk(issued[1], 1, "2nd READ");
      chk(issued[2], 2, "ADD"); chk(issued[3], 3, "TLEI");
      chk(issue_cyc[3] - issue_cyc[0], 3, "four issues in four consecutive cycles");
    end
    // TLEI outcome true, broadcast on channel 1 (predicate slot)
    bc_fire = 1; bc_chan = 1; bc_rdys = RDY_T; @(negedge clk); bc_fire = 0;
    repeat (6) @(negedge clk);
    chk(issued.size(), 5, "one branch issued");
    if (issued.size() >= 5) chk(issued[4], 4, "BRO.T issued");
    // refresh: same block again, no decode
    issued = {}; issue_cyc = {};
    blk_refresh = 1; @(negedge clk); blk_refresh = 0;
    repeat (6) @(negedge clk);
    chk(issued.size(), 4, "replay after refresh");
    if (issued.size() >= 4) chk(issued[3], 3, "TLEI again");
    bc_fire = 1; bc_chan = 1; bc_rdys = RDY_F; @(negedge clk); bc_fire = 0;
    repeat (6) @(negedge clk);
    chk(issued.size(), 5, "other branch issued");
    if (issued.size() >= 5) chk(issued[4], 5, "BRO.F issued");
    // a late operand event and a load/store release
    issued = {};
    ls_rel = 1; ls_rel_iid = 5'd2; @(negedge clk); ls_rel = 0;
    repeat (3) @(negedge clk);
    chk(issued.size(), 1, "LSRDYQ issue");
    if (issued.size() >= 1) chk(issued[0], 2, "LSRDYQ iid");
    chk(insn_from_ls, 0, "from_ls cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
