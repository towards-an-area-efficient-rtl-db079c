// edge_fig1_tb: runs the first example block of the EDGE overview on the
// whole core, at its default size.
//
//   I0 READ R0 -> I2.R    I1 READ R7 -> I2.L    I2 ADD -> I3.L
//   I3 TLEI #5 -> broadcast channel 1, predicate
//   I4 BRO.T (listens on channel 1) -> block T
//   I5 BRO.F (listens on channel 1) -> block F
//
// An init block sets R0 and R7 and branches to the example block; blocks T
// and F write a marker into R10 and halt. The core is run twice. The first
// time R0 + R7 = 5, so the test is true and only BRO.T may issue. The second
// time R0 + R7 = 13, so only BRO.F may issue. Each run checks the following:
//   * the marker register;
//   * that READ, READ, ADD and TLEI issue in four consecutive cycles, which
//     is the one-cycle wakeup recurrence;
//   * that the branch with the wrong predicate never issues;
//   * that the predicate reached the branches through a broadcast drain.
module edge_fig1_tb;
  import edge_pkg::*;
  import edge_asm_pkg::*;

  localparam int FIG = 0, TBLK = 16, FBLK = 20, INIT_T = 40, INIT_F = 48;

  logic clk = 1'b0, rst = 1'b1, run = 1'b0;
  logic [31:0] start_addr = '0;
  logic imem_we = 1'b0; logic [11:0] imem_wa = '0; logic [31:0] imem_wd = '0;
  logic dmem_en = 1'b0, dmem_we = 1'b0; logic [11:0] dmem_addr = '0;
  logic [31:0] dmem_wd = '0, dmem_rd;
  logic [4:0] dbg_reg = '0; logic [31:0] dbg_reg_data;
  logic busy, halted; logic [31:0] blocks_committed;
  int checks = 0, failures = 0, cycles = 0;

  edge_core dut (.clk, .rst, .run, .start_addr, .imem_we, .imem_wa, .imem_wd,
    .dmem_en, .dmem_we, .dmem_addr, .dmem_wd, .dmem_rd, .dbg_reg, .dbg_reg_data,
    .busy, .halted, .blocks_committed);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue log of the example block: cycle of each issued IID
  int iss_cyc [6];
  int iss_cnt [6];
  int n_drain = 0;
  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.is_go && dut.cur_blk == 32'(FIG)) begin
      iss_cyc[dut.insn.iid] = cycles;
      iss_cnt[dut.insn.iid]++;
    end
    if (dut.bc_drain) n_drain++;
  end

  task automatic put(int a, logic [31:0] w);
    @(negedge clk); imem_we = 1'b1; imem_wa = 12'(a); imem_wd = w;
    @(negedge clk); imem_we = 1'b0;
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_from(int a, int r0, int r7, int marker, int taken, int not_taken);
    logic [31:0] v;
    for (int i = 0; i < 6; i++) begin iss_cnt[i] = 0; iss_cyc[i] = 0; end
    n_drain = 0;
    @(negedge clk); start_addr = 32'(a); run = 1'b1;
    @(negedge clk); run = 1'b0;
    wait (halted);
    dbg_reg = 5'd10; #1 v = dbg_reg_data; check("R10 marker", int'(v), marker);
    dbg_reg = 5'd0;  #1 v = dbg_reg_data; check("R0", int'(v), r0);
    dbg_reg = 5'd7;  #1 v = dbg_reg_data; check("R7", int'(v), r7);
    for (int i = 0; i < 4; i++) check($sformatf("I%0d issued once", i), iss_cnt[i], 1);
    check("I1 right after I0", iss_cyc[1] - iss_cyc[0], 1);
    check("I2 right after I1", iss_cyc[2] - iss_cyc[1], 1);
    check("I3 right after I2", iss_cyc[3] - iss_cyc[2], 1);
    check("taken branch issued", iss_cnt[taken], 1);
    check("other branch never issued", iss_cnt[not_taken], 0);
    checks++;
    if (n_drain == 0) begin failures++; $display("FAIL no broadcast drain"); end
    $display("run from %0d: issue cycles %0d %0d %0d %0d, branch I%0d at %0d, drains %0d",
      a, iss_cyc[0], iss_cyc[1], iss_cyc[2], iss_cyc[3], taken, iss_cyc[taken], n_drain);
  endtask

  initial begin
    // the example block
    put(FIG + 0, hdr(6, 0, 0));
    put(FIG + 1, read(0, tR(2)));                            // I0
    put(FIG + 2, read(7, tL(2)));                            // I1
    put(FIG + 3, ins(OP_ADD, TNONE, tL(3)));                 // I2
    put(FIG + 4, insi(OP_TLEI, 5, tB(1, 1)));                // I3
    put(FIG + 5, bro(TBLK - FIG, PR_T, 1));                  // I4
    put(FIG + 6, bro(FBLK - FIG, PR_F, 1));                  // I5
    // branch targets
    put(TBLK + 0, hdr(2, 1, 0));
    put(TBLK + 1, insi(OP_MOVI, 111, tW(10)));
    put(TBLK + 2, bro(0, PR_NONE, 0, 1));
    put(FBLK + 0, hdr(2, 1, 0));
    put(FBLK + 1, insi(OP_MOVI, 222, tW(10)));
    put(FBLK + 2, bro(0, PR_NONE, 0, 1));
    // init blocks
    put(INIT_T + 0, hdr(3, 2, 0));
    put(INIT_T + 1, insi(OP_MOVI, 2, tW(0)));
    put(INIT_T + 2, insi(OP_MOVI, 3, tW(7)));
    put(INIT_T + 3, bro(FIG - INIT_T));
    put(INIT_F + 0, hdr(3, 2, 0));
    put(INIT_F + 1, insi(OP_MOVI, 4, tW(0)));
    put(INIT_F + 2, insi(OP_MOVI, 9, tW(7)));
    put(INIT_F + 3, bro(FIG - INIT_F));

    repeat (3) @(negedge clk);
    rst = 1'b0;
    run_from(INIT_T, 2, 3, 111, 4, 5);
    run_from(INIT_F, 4, 9, 222, 5, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
