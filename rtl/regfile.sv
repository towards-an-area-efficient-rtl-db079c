// regfile: the global register file, NREGS x W.
//
// Blocks communicate through registers: READ instructions read it in the
// issue stage, and a block's register writes are applied here when the block
// commits. One write port and two combinational read ports (the second for
// observation), as a LUT-RAM would provide. Writes land at the next edge.
module regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned W     = 32,
  localparam int unsigned AW = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [W-1:0]  wd,
  input  logic [AW-1:0] ra,
  output logic [W-1:0]  rd,
  input  logic [AW-1:0] dbg_ra,
  output logic [W-1:0]  dbg_rd
);
  logic [W-1:0] r [NREGS];

  always_ff @(posedge clk) if (we) r[wa] <= wd;

  assign rd     = r[ra];
  assign dbg_rd = r[dbg_ra];
endmodule
