// decoder: decodes one 32-bit EDGE instruction for the instruction window.
//
// Produces the decoded instruction written to the decoded instructions
// buffer and the decoded ready state {DRT,DRF,DR0,DR1} written to the
// scheduler. DRT/DRF are set unless the instruction waits for a true/false
// predicate; DR0/DR1 are set for each operand the instruction does not use.
// An unpredicated instruction with no operands therefore decodes as ready.
//
// Targets are sorted for the scheduler. Instructions with one-cycle latency
// (READ, MOVI, MOV, ALU and ALU-immediate) wake an operand target already in
// the issue stage: the decoder places the target ready event in ev_even or
// ev_odd according to the target's bank (IID bit 0). If both targets fall in
// the same bank, only the first is woken at issue and the second is left to
// the LS stage. Tests, multiplies and loads wake all targets in the LS stage,
// and predicate, register and broadcast targets are always handled there.
//
// The field layout follows the published format; opcode values and the
// target code are this implementation's (see edge_pkg). Purely
// combinational.
//
// Some output bits are constant or copies by construction: the RT/RF bits of
// the IS-stage events are always 0 (only operand targets are woken at issue),
// and the upper bits of the 32-bit immediate are copies of its sign bit.
module decoder
  import edge_pkg::*;
(
  input  iid_t        iid,
  input  logic [31:0] raw,
  output decoded_t    d,
  output rdys_t       drdys
);
  opcode_e op;
  logic    use_l, use_r, one_cycle, t1_is_tgt;
  tkind_e  k0, k1;

  always_comb begin
    op = opcode_e'(raw[31:25]);
    d  = '0;
    d.iid = iid;
    d.op  = op;
    d.pr  = raw[24:23];
    d.bid = raw[22:21];
    d.xop = raw[20:18];
    d.t0  = raw[8:0];
    d.t1  = raw[17:9];
    d.imm = {{23{raw[17]}}, raw[17:9]};

    use_l = 1'b0; use_r = 1'b0; one_cycle = 1'b0; t1_is_tgt = 1'b1;
    unique case (op)
      OP_READ: begin one_cycle = 1'b1; t1_is_tgt = 1'b0; d.imm = {27'd0, raw[13:9]}; end
      OP_MOVI: begin one_cycle = 1'b1; t1_is_tgt = 1'b0; d.use_imm = 1'b1; end
      OP_MOV:  begin one_cycle = 1'b1; use_l = 1'b1; end
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR, OP_SRA: begin
        one_cycle = 1'b1; use_l = 1'b1; use_r = 1'b1;
      end
      OP_ADDI, OP_SUBI, OP_ANDI, OP_ORI, OP_XORI, OP_SHLI, OP_SHRI, OP_SRAI: begin
        one_cycle = 1'b1; use_l = 1'b1; t1_is_tgt = 1'b0; d.use_imm = 1'b1;
      end
      OP_MUL: begin use_l = 1'b1; use_r = 1'b1; d.is_mul = 1'b1; end
      OP_TEQ, OP_TNE, OP_TLT, OP_TLE, OP_TGT, OP_TGE: begin
        use_l = 1'b1; use_r = 1'b1; d.is_test = 1'b1;
      end
      OP_TEQI, OP_TNEI, OP_TLTI, OP_TLEI, OP_TGTI, OP_TGEI: begin
        use_l = 1'b1; t1_is_tgt = 1'b0; d.use_imm = 1'b1; d.is_test = 1'b1;
      end
      OP_LD: begin
        use_l = 1'b1; t1_is_tgt = 1'b0; d.use_imm = 1'b1; d.is_mem = 1'b1; d.is_ld = 1'b1;
      end
      OP_ST: begin
        use_l = 1'b1; use_r = 1'b1; t1_is_tgt = 1'b0; d.use_imm = 1'b1;
        d.is_mem = 1'b1; d.is_st = 1'b1; d.t0 = '0;
      end
      OP_BRO: begin
        t1_is_tgt = 1'b0; d.is_br = 1'b1; d.t0 = '0;
        d.imm = {{14{raw[17]}}, raw[17:0]};
      end
      default: ;   // NOP and undefined opcodes: no inputs, no targets
    endcase
    if (!t1_is_tgt) d.t1 = '0;

    // decoded ready state
    drdys = {d.pr != PR_T, d.pr != PR_F, !use_l, !use_r};

    // IS-stage wakeup events, sorted into even/odd banks
    k0 = tgt_kind(d.t0);
    k1 = tgt_kind(d.t1);
    if (one_cycle && (k0 == TK_OP0 || k0 == TK_OP1)) begin
      d.t0_is = 1'b1;
      if (d.t0[0]) d.ev_odd  = '{v: 1'b1, iid: d.t0[4:1], rdys: (k0 == TK_OP0) ? RDY_0 : RDY_1};
      else         d.ev_even = '{v: 1'b1, iid: d.t0[4:1], rdys: (k0 == TK_OP0) ? RDY_0 : RDY_1};
    end
    if (one_cycle && (k1 == TK_OP0 || k1 == TK_OP1)) begin
      if (d.t1[0] && !d.ev_odd.v) begin
        d.t1_is  = 1'b1;
        d.ev_odd = '{v: 1'b1, iid: d.t1[4:1], rdys: (k1 == TK_OP0) ? RDY_0 : RDY_1};
      end else if (!d.t1[0] && !d.ev_even.v) begin
        d.t1_is   = 1'b1;
        d.ev_even = '{v: 1'b1, iid: d.t1[4:1], rdys: (k1 == TK_OP0) ? RDY_0 : RDY_1};
      end
    end
  end
endmodule
