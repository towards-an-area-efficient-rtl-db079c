// operand_buffers: left and right operand storage of the instruction window.
//
// Each window entry owns a left (operand #0) and a right (operand #1) W-bit
// buffer. A producer writes its result straight into its consumers' buffers
// (target form); the consumer reads both when it issues. Two writes per cycle
// are accepted, because one result may have two targets, possibly both left
// or both right operands. Write address is {slot, IID} (slot 0 left, 1 right).
//
// Timing: writes land at the next edge; reads are combinational, like the
// LUT-RAMs of the original design. The two-write port is this
// implementation's choice and is built from flip-flops. Two writes to the
// same buffer entry in one cycle are a program error; port 1 wins.
module operand_buffers #(
  parameter int unsigned N = 32,
  parameter int unsigned W = 32,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic         clk,
  input  logic         we  [2],
  input  logic [AW:0]  wa  [2],   // {slot, IID}
  input  logic [W-1:0] wd  [2],
  input  logic [AW-1:0] ra,
  output logic [W-1:0] rd_l,
  output logic [W-1:0] rd_r
);
  logic [W-1:0] buf_l [N];
  logic [W-1:0] buf_r [N];

  always_ff @(posedge clk) begin
    for (int k = 0; k < 2; k++) begin
      if (we[k] && !wa[k][AW]) buf_l[wa[k][AW-1:0]] <= wd[k];
      if (we[k] &&  wa[k][AW]) buf_r[wa[k][AW-1:0]] <= wd[k];
    end
  end

  assign rd_l = buf_l[ra];
  assign rd_r = buf_r[ra];
endmodule
