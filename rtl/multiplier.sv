// multiplier: two-stage 32x32 multiplier (low 32 bits of the product).
//
// The operands are presented in the EX stage and registered; the product is
// formed in the LS stage, so the result is available one cycle after the
// operands. Multiply results therefore wake their targets from the LS stage.
// The two-stage split follows the EX/LS placement of the multiplier in the
// original pipeline diagram; how the product is split is this design's.
module multiplier (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] ar, br;
  always_ff @(posedge clk) if (en) begin ar <= a; br <= b; end
  assign y = ar * br;
endmodule
