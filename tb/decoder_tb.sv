// decoder_tb: decodes the first example block of the EDGE overview (two
// READs, ADD, TLEI, BRO.T/BRO.F on broadcast channel 1) and checks the
// decoded ready state against the example scheduler table, plus the
// IS-stage event sorting, same-bank conflicts and immediate fields.
module decoder_tb;
  import edge_pkg::*;
  import edge_asm_pkg::*;
  iid_t iid; logic [31:0] raw; decoded_t d; rdys_t drdys;
  int checks = 0, failures = 0;
  decoder dut (.*);
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic [31:0] got, logic [31:0] exp, string s);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", s, got, exp); end
  endtask
  task automatic dec(int i, logic [31:0] w); iid = 5'(i); raw = w; #1; endtask
  initial begin
    // decoded ready state {DRT,DRF,DR0,DR1} as in the example table
    dec(0, read(0, tR(2)));                         chk(drdys, 4'b1111, "READ drdys");
    chk(d.ev_even.v, 1, "READ even event"); chk(d.ev_even.iid, 1, "READ ev iid");
    chk(d.ev_even.rdys, 4'b0001, "READ ev rdys (operand #1)"); chk(d.imm, 0, "READ reg");
    dec(1, read(7, tL(2)));                         chk(d.imm, 7, "READ R7");
    chk(d.ev_even.rdys, 4'b0010, "READ ev rdys (operand #0)");
    dec(2, ins(OP_ADD, TNONE, tL(3)));              chk(drdys, 4'b1100, "ADD drdys");
    chk(d.ev_odd.v, 1, "ADD odd event"); chk(d.ev_odd.iid, 1, "ADD ev iid"); chk(d.ev_even.v, 0, "ADD no even");
    dec(3, insi(OP_TLEI, 5, tB(1, 1)));             chk(drdys, 4'b1101, "TLEI drdys");
    chk(d.imm, 5, "TLEI imm"); chk(d.is_test, 1, "TLEI test"); chk(d.ev_even.v | d.ev_odd.v, 0, "TLEI no IS event");
    dec(4, bro(3, PR_T, 1));                        chk(drdys, 4'b0111, "BRO.T drdys"); chk(d.bid, 1, "BRO.T bid");
    chk(d.imm, 3, "BRO offset"); chk(d.is_br, 1, "is_br");
    dec(5, bro(-4, PR_F, 1));                       chk(drdys, 4'b1011, "BRO.F drdys"); chk(d.imm, 32'hFFFFFFFC, "BRO neg offset");
    // two targets in the same bank: second is left for the LS stage
    dec(6, ins(OP_ADD, tL(12), tR(10)));
    chk(d.ev_even.v, 1, "conflict first"); chk(d.ev_even.iid, 5, "conflict first iid");
    chk(d.t0_is, 1, "t0 at IS"); chk(d.t1_is, 0, "t1 late"); chk(d.ev_odd.v, 0, "conflict no odd");
    // different banks: both at IS
    dec(6, ins(OP_SUB, tL(13), tR(10)));
    chk(d.t0_is & d.t1_is, 1, "both at IS"); chk(d.ev_odd.iid, 6, "odd iid");
    // late instructions
    dec(7, ins(OP_MUL, TNONE, tL(9)));              chk(d.t0_is, 0, "MUL late"); chk(d.is_mul, 1, "is_mul");
    dec(8, insi(OP_LD, -8, tW(3)));                 chk(d.is_ld & d.is_mem, 1, "LD");
    chk(d.imm, 32'hFFFFFFF8, "LD imm"); chk(drdys, 4'b1101, "LD drdys");
    dec(9, insi(OP_ST, 4, TNONE));                  chk(d.is_st, 1, "ST"); chk(drdys, 4'b1100, "ST drdys");
    dec(10, insi(OP_ADDI, 1, tP(12)));              chk(d.t0_is, 0, "predicate target late");
    chk(d.iid, 10, "iid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
