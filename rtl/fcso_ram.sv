// fcso_ram: flash-clearable, set-only RAM (FC-SO-RAM), DEPTH x 1 bit.
//
// One flip-flop per entry with a common clear. A write sets the addressed
// bit; clr flash-clears every bit in one cycle. The read port is a
// combinational DEPTH:1 mux. It validates a LUT-RAM that cannot itself be
// flash cleared: a LUT-RAM entry counts only while its bit here is set.
//
// Timing: set and clear take effect at the next clock edge; reads are
// asynchronous. When clr and we coincide, clr wins (a design choice, so a
// block reset always leaves the window empty).
module fcso_ram #(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          clr,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [AW-1:0] ra,
  output logic          rd,
  input  logic [AW-1:0] ra2,   // second read port
  output logic          rd2
);
  logic [DEPTH-1:0] v;

  always_ff @(posedge clk) begin
    if (clr)     v <= '0;
    else if (we) v[wa] <= 1'b1;
  end

  assign rd  = v[ra];
  assign rd2 = v[ra2];
endmodule
