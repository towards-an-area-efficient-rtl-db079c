// edge_core_tb: end-to-end test of the EDGE core at its default size.
//
// Loads a three-block program, runs it to the halt and checks registers,
// memory and the cycle count of the dependent chain. The program:
//   block A (init): R1 = 0, R2 = 0 through a move that wakes one even and
//     one odd instruction; a test against an immediate drives a predicated
//     branch through a direct predicate target.
//   block L (loop, ITER times): i = R1 is broadcast on channel 1 to four
//     consumers; acc' = acc + i -> R2; mem[16 + i] = acc' + 3*i (multiply,
//     store); R1 = i + 1; a test broadcasts its predicate on channel 2 to a
//     branch-true (back to L: refresh) and a branch-false (to X).
//   block X (exit): arithmetic with two same-bank targets, a load of
//     mem[17], register writes, halt.
// Each mechanism of the core is counted while it runs; one that never
// happens is a failure.
module edge_core_tb;
  import edge_pkg::*;
  import edge_asm_pkg::*;

  localparam int ITER = 10;
  localparam int LBLK = 12;    // word address of loop block
  localparam int XBLK = 32;    // word address of exit block

  logic clk = 1'b0, rst = 1'b1, run = 1'b0;
  logic imem_we = 1'b0; logic [11:0] imem_wa = '0; logic [31:0] imem_wd = '0;
  logic dmem_en = 1'b0, dmem_we = 1'b0; logic [11:0] dmem_addr = '0;
  logic [31:0] dmem_wd = '0, dmem_rd;
  logic [4:0] dbg_reg = '0; logic [31:0] dbg_reg_data;
  logic busy, halted; logic [31:0] blocks_committed;
  int checks = 0, failures = 0, cycles = 0;

  edge_core dut (.clk, .rst, .run, .start_addr(32'd0), .imem_we, .imem_wa, .imem_wd,
    .dmem_en, .dmem_we, .dmem_addr, .dmem_wd, .dmem_rd, .dbg_reg, .dbg_reg_data,
    .busy, .halted, .blocks_committed);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_b2b = 0, n_isq = 0, n_conflict = 0, n_drain = 0, n_refresh = 0, n_reset = 0;
  int n_defer = 0, n_rel = 0, n_fwd_ex = 0, n_fwd_ls = 0, n_late = 0, n_lateready = 0;
  int n_dcq = 0, n_pred = 0;
  always @(posedge clk) if (!rst && cycles < 60 && $test$plusargs("trace"))
    $display("c%0d st=%0d insn v=%0d iid=%0d op=%s go=%0d | dc %0d/%0d iid%0d | ev0 %0d:%0d/%h r%0d ev1 %0d:%0d/%h r%0d late %0d %0d | wr=%0d br=%0d fe=%0d",
      cycles, dut.st, dut.insn_valid, dut.insn.iid, dut.insn.op.name(), dut.is_go, dut.dc_we[0], dut.dc_we[1], dut.dc_d[0].iid,
      dut.u_sched.evt_v[0], dut.u_sched.evt_iid[0], dut.u_sched.evt_rdys[0], dut.u_sched.sch_ready[0],
      dut.u_sched.evt_v[1], dut.u_sched.evt_iid[1], dut.u_sched.evt_rdys[1], dut.u_sched.sch_ready[1],
      dut.u_sched.sch_late[0], dut.u_sched.sch_late[1], dut.wr_cnt, dut.br_done, dut.fe_done);
  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.u_sched.sch_ready[0] || dut.u_sched.sch_ready[1]) n_b2b++;
    if (dut.both_ready) n_isq++;
    if (dut.ls_live && (tgt_kind(dut.ls_d.t1) inside {TK_OP0, TK_OP1}) && !dut.ls_d.t1_is
        && !dut.ls_d.is_test && !dut.ls_d.is_mul && !dut.ls_d.is_ld) n_conflict++;
    if (dut.bc_drain) n_drain++;
    if (dut.blk_refresh) n_refresh++;
    if (dut.blk_reset) n_reset++;
    if (dut.is_defer) n_defer++;
    if (dut.ls_rel) n_rel++;
    if (dut.is_go && (dut.fwd_ex_l || dut.fwd_ex_r)) n_fwd_ex++;
    if (dut.is_go && (dut.fwd_ls_l || dut.fwd_ls_r)) n_fwd_ls++;
    if (dut.late_v[0] || dut.late_v[1]) n_late++;
    if (dut.u_sched.sch_late[0] || dut.u_sched.sch_late[1]) n_lateready++;
    if (dut.u_sched.dcq_pop) n_dcq++;
    if (dut.late_v[0] && (dut.late_rdys[0] == RDY_T || dut.late_rdys[0] == RDY_F)) n_pred++;
  end

  task automatic put(int a, logic [31:0] w);
    @(negedge clk); imem_we = 1'b1; imem_wa = 12'(a); imem_wd = w;
    @(negedge clk); imem_we = 1'b0;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic rdreg(int r, output logic [31:0] v);
    dbg_reg = 5'(r); #1 v = dbg_reg_data;
  endtask

  task automatic rdmem(int a, output logic [31:0] v);
    @(negedge clk); dmem_en = 1'b1; dmem_we = 1'b0; dmem_addr = 12'(a);
    @(negedge clk); dmem_en = 1'b0; v = dmem_rd;
  endtask

  logic [31:0] v;
  int exp_acc, t_run;
  initial begin
    // ---- block A at 0 ----
    put(0, hdr(8, 2, 0));
    put(1, insi(OP_MOVI, 0, tL(5)));                         // I0 0 -> I5.L
    put(2, insi(OP_MOVI, 3, tL(2)));                         // I1 3 -> I2.L
    put(3, insi(OP_TLEI, 5, tP(3)));                         // I2 3 <= 5 -> I3.P
    put(4, bro(LBLK - 0, PR_T));                             // I3 branch if true
    put(5, ins(OP_NOP, TNONE, TNONE));                       // I4
    put(6, ins(OP_MOV, tL(7), tL(6)));                       // I5 -> I6.L, I7.L (both banks)
    put(7, ins(OP_MOV, TNONE, tW(1)));                       // I6 R1 = 0
    put(8, ins(OP_MOV, TNONE, tW(2)));                       // I7 R2 = 0
    // ---- block L at LBLK ----
    put(LBLK + 0,  hdr(13, 2, 1));
    put(LBLK + 1,  read(1, tB(1, 2)));                       // I0  i -> B1.L
    put(LBLK + 2,  read(2, tR(6)));                          // I1  acc -> I6.R
    put(LBLK + 3,  insi(OP_MOVI, 3, tR(4)));                 // I2  3 -> I4.R
    put(LBLK + 4,  insi(OP_ADDI, 1, tL(5), PR_NONE, 1));     // I3  i+1 -> I5
    put(LBLK + 5,  ins(OP_MUL, TNONE, tR(7), PR_NONE, 1));   // I4  3i -> I7.R
    put(LBLK + 6,  ins(OP_MOV, tW(1), tL(8)));               // I5  i+1 -> I8, R1
    put(LBLK + 7,  ins(OP_ADD, tW(2), tL(7), PR_NONE, 1));   // I6  acc+i -> I7.L, R2
    put(LBLK + 8,  ins(OP_ADD, TNONE, tR(10)));              // I7  data -> I10.R
    put(LBLK + 9,  insi(OP_TLTI, ITER, tB(2, 1)));           // I8  i+1 < ITER -> B2.P
    put(LBLK + 10, insi(OP_SHLI, 2, tL(10), PR_NONE, 1));    // I9  4i -> I10.L
    put(LBLK + 11, insi(OP_ST, 64, TNONE));                  // I10 mem[(4i+64)/4] = data
    put(LBLK + 12, bro(0, PR_T, 2));                         // I11 loop (refresh)
    put(LBLK + 13, bro(XBLK - LBLK, PR_F, 2));               // I12 exit
    // ---- block X at XBLK ----
    put(XBLK + 0,  hdr(10, 4, 0));
    put(XBLK + 1,  insi(OP_MOVI, 64, tL(8)));                // I0 64 -> I8.L (not yet decoded)
    put(XBLK + 2,  insi(OP_MOVI, 5, tR(2)));                 // I1 5 -> I2.R
    put(XBLK + 3,  ins(OP_ADD, tL(6), tL(4)));               // I2 acc+5 -> I4.L, I6.L (same bank)
    put(XBLK + 4,  insi(OP_MOVI, 7, tW(4)));                 // I3 R4 = 7
    put(XBLK + 5,  ins(OP_MOV, TNONE, tW(3)));               // I4 R3 = acc+5
    put(XBLK + 6,  insi(OP_MOVI, 1, tR(6)));                 // I5 1 -> I6.R
    put(XBLK + 7,  ins(OP_ADD, TNONE, tW(5)));               // I6 R5 = acc+6
    put(XBLK + 8,  read(2, tL(2)));                          // I7 acc -> I2.L
    put(XBLK + 9,  insi(OP_LD, 4, tW(6)));                   // I8 R6 = mem[17]
    put(XBLK + 10, bro(0, PR_NONE, 0, 1));                   // I9 halt

    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk); run = 1'b1;
    @(negedge clk); run = 1'b0;
    t_run = cycles;
    wait (halted);
    $display("halted after %0d cycles, %0d blocks", cycles - t_run, blocks_committed);
    exp_acc = 0;
    for (int i = 0; i < ITER; i++) exp_acc += i;
    check("blocks committed", blocks_committed, 32'(ITER + 2));
    rdreg(1, v); check("R1", v, ITER);
    rdreg(2, v); check("R2", v, 32'(exp_acc));
    rdreg(3, v); check("R3", v, 32'(exp_acc + 5));
    rdreg(4, v); check("R4", v, 7);
    rdreg(5, v); check("R5", v, 32'(exp_acc + 6));
    rdreg(6, v); check("R6", v, 4);
    begin
      int acc = 0;
      for (int i = 0; i < ITER; i++) begin
        acc += i;
        rdmem(16 + i, v); check($sformatf("mem[%0d]", 16 + i), v, 32'(acc + 3 * i));
      end
    end
    // mechanisms
    checks++; if (n_b2b == 0)      begin failures++; $display("FAIL no IS-stage wakeup"); end
    checks++; if (n_isq == 0)      begin failures++; $display("FAIL no ISRDYQ deferral"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_drain == 0)    begin failures++; $display("FAIL no broadcast drain"); end
    checks++; if (n_refresh != ITER - 1) begin failures++; $display("FAIL refresh count %0d", n_refresh); end
    checks++; if (n_reset != 3)    begin failures++; $display("FAIL reset count %0d", n_reset); end
    checks++; if (n_defer != ITER + 1 || n_rel != ITER + 1) begin failures++; $display("FAIL lsq %0d %0d", n_defer, n_rel); end
    checks++; if (n_fwd_ex == 0)   begin failures++; $display("FAIL no EX forwarding"); end
    checks++; if (n_fwd_ls == 0)   begin failures++; $display("FAIL no LS forwarding"); end
    checks++; if (n_late == 0)     begin failures++; $display("FAIL no late events"); end
    checks++; if (n_lateready == 0) begin failures++; $display("FAIL no wakeup at decode"); end
    checks++; if (n_pred == 0)     begin failures++; $display("FAIL no predicate event"); end
    $display("wakeups=%0d isrdyq=%0d conflicts=%0d drains=%0d refresh=%0d reset=%0d defer=%0d fwd_ex=%0d fwd_ls=%0d late=%0d lateready=%0d dcq=%0d pred=%0d",
      n_b2b, n_isq, n_conflict, n_drain, n_refresh, n_reset, n_defer, n_fwd_ex, n_fwd_ls, n_late, n_lateready, n_dcq, n_pred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
