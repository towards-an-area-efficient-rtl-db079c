// edge_asm_pkg: instruction encoders for the EDGE core testbenches.
//
// Builds 32-bit instruction words and target fields in the format described
// in edge_pkg: OPCODE[31:25] PR[24:23] BID[22:21] XOP[20:18] TARGET1[17:9]
// TARGET0[8:0].
package edge_asm_pkg;
  import edge_pkg::*;

  function automatic logic [8:0] tL(int iid);  return {2'b10, 2'b00, 5'(iid)}; endfunction
  function automatic logic [8:0] tR(int iid);  return {2'b11, 2'b00, 5'(iid)}; endfunction
  function automatic logic [8:0] tP(int iid);  return {2'b01, 2'b00, 5'(iid)}; endfunction
  function automatic logic [8:0] tW(int r);    return {2'b00, 2'b01, 5'(r)}; endfunction
  // broadcast on channel ch to slot (1 predicate, 2 left, 3 right)
  function automatic logic [8:0] tB(int ch, int slot);
    return {2'b00, 2'b10, 2'(slot), 1'b0, 2'(ch)};
  endfunction
  localparam logic [8:0] TNONE = 9'd0;

  function automatic logic [31:0] ins(opcode_e op, logic [8:0] t1, logic [8:0] t0,
                                      logic [1:0] pr = PR_NONE, int bid = 0, int xop = 0);
    return {op, pr, 2'(bid), 3'(xop), t1, t0};
  endfunction
  function automatic logic [31:0] insi(opcode_e op, int imm, logic [8:0] t0,
                                       logic [1:0] pr = PR_NONE, int bid = 0);
    return {op, pr, 2'(bid), 3'd0, 9'(imm), t0};
  endfunction
  function automatic logic [31:0] read(int r, logic [8:0] t0, int bid = 0);
    return {OP_READ, PR_NONE, 2'(bid), 3'd0, 4'd0, 5'(r), t0};
  endfunction
  function automatic logic [31:0] bro(int off, logic [1:0] pr = PR_NONE, int bid = 0, int halt = 0);
    return {OP_BRO, pr, 2'(bid), 3'(halt), 18'(off)};
  endfunction
  function automatic logic [31:0] hdr(int n, int nwr, int nst);
    return {10'd0, 6'(nst), 2'd0, 6'(nwr), 2'd0, 6'(n)};
  endfunction
endpackage
