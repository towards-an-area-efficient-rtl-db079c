// alu: integer ALU and test unit of the EX stage.
//
// Computes move, add, subtract, logic and shift operations and the test
// (compare) instructions, whose result is 1 or 0 and is used as a predicate.
// b is the right operand or the immediate, as the decoder selects. READ and
// MOVI pass a through (the issue stage already put the register value or
// the constant there). Shifts use b[4:0]. Compares are signed.
// Combinational. The set of operations beyond ADD, SUB, MOV and the tests is
// this implementation's.
module alu
  import edge_pkg::*;
(
  input  opcode_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    unique case (op)
      OP_ADD,  OP_ADDI, OP_LD, OP_ST: y = a + b;
      OP_SUB,  OP_SUBI:               y = a - b;
      OP_AND,  OP_ANDI:               y = a & b;
      OP_OR,   OP_ORI:                y = a | b;
      OP_XOR,  OP_XORI:               y = a ^ b;
      OP_SHL,  OP_SHLI:               y = a << b[4:0];
      OP_SHR,  OP_SHRI:               y = a >> b[4:0];
      OP_SRA,  OP_SRAI:               y = 32'($signed(a) >>> b[4:0]);
      OP_TEQ,  OP_TEQI:               y = {31'd0, a == b};
      OP_TNE,  OP_TNEI:               y = {31'd0, a != b};
      OP_TLT,  OP_TLTI:               y = {31'd0, $signed(a) <  $signed(b)};
      OP_TLE,  OP_TLEI:               y = {31'd0, $signed(a) <= $signed(b)};
      OP_TGT,  OP_TGTI:               y = {31'd0, $signed(a) >  $signed(b)};
      OP_TGE,  OP_TGEI:               y = {31'd0, $signed(a) >= $signed(b)};
      default:                        y = a;   // READ, MOVI, MOV
    endcase
  end
endmodule
