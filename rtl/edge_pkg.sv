// edge_pkg: types and constants shared by the EDGE core.
//
// Instruction word (32 bits, field widths as in the EDGE general format):
//   [31:25] OPCODE  [24:23] PR  [22:21] BID  [20:18] XOP  [17:9] TARGET1  [8:0] TARGET0
// The field names and widths follow the published format. The bit positions
// follow the left-to-right order of the fields. The opcode values, the PR
// code and the 9-bit target code are choices of this implementation.
//
// Target field (9 bits):
//   [8:7]=01 predicate of IID[4:0]   [8:7]=10 left operand (#0)   [8:7]=11 right operand (#1)
//   [8:7]=00: [6:5]=00 no target, [6:5]=01 write register [4:0],
//             [6:5]=10 broadcast on channel [1:0] (1..3) to input slot [4:3]
//             (slot 01 predicate, 10 left, 11 right)
// Immediate forms carry a 9-bit signed immediate in TARGET1 and have one
// target (TARGET0). READ carries its register number in TARGET1[4:0].
// BRO carries an 18-bit signed word offset in {TARGET1,TARGET0}; offset 0
// branches back to the same block (refresh). BRO with XOP[0]=1 halts.
//
// Block header word: [5:0] instruction count (1..32), [13:8] number of
// register writes, [21:16] number of stores. The instructions follow it.
//
// Ready-state nibble order is {RT, RF, R0, R1} (bit 3 .. bit 0).
//
// Lint note: NWIN and the PR_* codes document the format; not every unit
// that imports the package uses them. tgt_kind() reads only the kind bits
// of a target.
package edge_pkg;

  localparam int unsigned NWIN  = 32;           // instruction window entries
  localparam int unsigned IIDW  = 5;            // log2(NWIN)
  localparam int unsigned BIIDW = 4;            // bank-IID width (16-entry banks)

  typedef logic [IIDW-1:0]  iid_t;
  typedef logic [BIIDW-1:0] biid_t;
  typedef logic [3:0]       rdys_t;             // {RT,RF,R0,R1}

  localparam rdys_t RDY_T = 4'b1000;
  localparam rdys_t RDY_F = 4'b0100;
  localparam rdys_t RDY_0 = 4'b0010;
  localparam rdys_t RDY_1 = 4'b0001;

  typedef enum logic [6:0] {
    OP_NOP  = 7'h00,
    OP_READ = 7'h01,   // read register TARGET1[4:0]
    OP_MOVI = 7'h02,   // constant
    OP_MOV  = 7'h03,   // left operand
    OP_ADD  = 7'h10, OP_SUB  = 7'h11, OP_AND  = 7'h12, OP_OR   = 7'h13,
    OP_XOR  = 7'h14, OP_SHL  = 7'h15, OP_SHR  = 7'h16, OP_SRA  = 7'h17,
    OP_ADDI = 7'h18, OP_SUBI = 7'h19, OP_ANDI = 7'h1A, OP_ORI  = 7'h1B,
    OP_XORI = 7'h1C, OP_SHLI = 7'h1D, OP_SHRI = 7'h1E, OP_SRAI = 7'h1F,
    OP_MUL  = 7'h20,
    OP_TEQ  = 7'h30, OP_TNE  = 7'h31, OP_TLT  = 7'h32, OP_TLE  = 7'h33,
    OP_TGT  = 7'h34, OP_TGE  = 7'h35,
    OP_TEQI = 7'h38, OP_TNEI = 7'h39, OP_TLTI = 7'h3A, OP_TLEI = 7'h3B,
    OP_TGTI = 7'h3C, OP_TGEI = 7'h3D,
    OP_LD   = 7'h40,   // left + imm -> target
    OP_ST   = 7'h41,   // mem[left + imm] = right
    OP_BRO  = 7'h50
  } opcode_e;

  // predicate field
  localparam logic [1:0] PR_NONE = 2'b00;
  localparam logic [1:0] PR_F    = 2'b10;
  localparam logic [1:0] PR_T    = 2'b11;

  // target kinds
  typedef enum logic [2:0] {
    TK_NONE, TK_PRED, TK_OP0, TK_OP1, TK_REG, TK_BCAST
  } tkind_e;

  function automatic tkind_e tgt_kind(logic [8:0] t);
    unique case (t[8:7])
      2'b01:   return TK_PRED;
      2'b10:   return TK_OP0;
      2'b11:   return TK_OP1;
      default: begin
        if (t[6:5] == 2'b01)                      return TK_REG;
        else if (t[6:5] == 2'b10 && t[1:0] != 0)  return TK_BCAST;
        else                                      return TK_NONE;
      end
    endcase
  endfunction

  // ready bits set in the target by a result (predicate results use value bit 0)
  function automatic rdys_t slot_rdys(logic [1:0] slot, logic pval);
    unique case (slot)
      2'b01:   return pval ? RDY_T : RDY_F;
      2'b10:   return RDY_0;
      2'b11:   return RDY_1;
      default: return 4'b0000;
    endcase
  endfunction

  // one target ready event for a 16-entry bank
  typedef struct packed {
    logic  v;
    biid_t iid;
    rdys_t rdys;
  } evt_t;

  // decoded instruction, as held in INSNS and in the INSN register
  typedef struct packed {
    iid_t        iid;       // its own index in the window
    opcode_e     op;
    logic [2:0]  xop;
    logic [1:0]  pr;
    logic [1:0]  bid;       // broadcast channel it listens on (0: none)
    logic [31:0] imm;       // sign-extended immediate, register number or branch offset
    logic [8:0]  t0;        // raw targets
    logic [8:0]  t1;
    logic        t0_is;     // target 0 already woken at IS
    logic        t1_is;     // target 1 already woken at IS
    evt_t        ev_even;   // IS-stage ready event for the even bank (INSN.T0)
    evt_t        ev_odd;    // IS-stage ready event for the odd bank (INSN.T1)
    logic        use_imm;
    logic        is_mem;
    logic        is_ld;
    logic        is_st;
    logic        is_br;
    logic        is_mul;
    logic        is_test;
  } decoded_t;

endpackage
