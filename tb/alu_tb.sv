// alu_tb: every operation on random operands against expressions computed
// here.
module alu_tb;
  import edge_pkg::*;
  opcode_e op; logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  opcode_e ops [] = '{OP_READ, OP_MOVI, OP_MOV, OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SHL,
    OP_SHR, OP_SRA, OP_ADDI, OP_SUBI, OP_ANDI, OP_ORI, OP_XORI, OP_SHLI, OP_SHRI, OP_SRAI,
    OP_TEQ, OP_TNE, OP_TLT, OP_TLE, OP_TGT, OP_TGE, OP_TEQI, OP_TNEI, OP_TLTI, OP_TLEI,
    OP_TGTI, OP_TGEI, OP_LD, OP_ST};
  alu dut (.*);
  initial begin #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [31:0] ref_y(opcode_e o, logic [31:0] x, logic [31:0] z);
    logic signed [31:0] sx, sz; sx = x; sz = z;
    case (o)
      OP_ADD, OP_ADDI, OP_LD, OP_ST: return x + z;
      OP_SUB, OP_SUBI: return x - z;
      OP_AND, OP_ANDI: return x & z;
      OP_OR,  OP_ORI:  return x | z;
      OP_XOR, OP_XORI: return x ^ z;
      OP_SHL, OP_SHLI: return x << (z % 32);
      OP_SHR, OP_SHRI: return x >> (z % 32);
      OP_SRA, OP_SRAI: return sx >>> (z % 32);
      OP_TEQ, OP_TEQI: return 32'(x == z);
      OP_TNE, OP_TNEI: return 32'(x != z);
      OP_TLT, OP_TLTI: return 32'(sx < sz);
      OP_TLE, OP_TLEI: return 32'(sx <= sz);
      OP_TGT, OP_TGTI: return 32'(sx > sz);
      OP_TGE, OP_TGEI: return 32'(sx >= sz);
      default: return x;
    endcase
  endfunction
  initial begin
    for (int n = 0; n < 4000; n++) begin
      op = ops[$urandom_range(0, ops.size() - 1)];
      a = $urandom; b = $urandom;
      if (n % 4 == 0) b = a;                         // exercise equality
      if (n % 8 == 1) b = {27'd0, 5'($urandom)};
      #1 e = ref_y(op, a, b); checks++;
      if (y !== e) begin failures++; $display("FAIL %s %h %h -> %h exp %h", op.name(), a, b, y, e); end
    end
    // the example test: 3 <= 5
    op = OP_TLEI; a = 3; b = 5; #1 checks++; if (y !== 1) failures++;
    a = 6; #1 checks++; if (y !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
