// icache_data: instruction cache data array, WORDS x 32, two read ports.
//
// A block RAM with two synchronous read ports, so the front end can fetch two
// instructions per clock, and a write port used to load the program. Read
// data appears the cycle after the address. Only the data array of the
// instruction cache is built; there are no tags and no refill, so the array
// acts as the instruction memory.
module icache_data #(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic [AW-1:0] ra0,
  output logic [31:0]   rd0,
  input  logic [AW-1:0] ra1,
  output logic [31:0]   rd1,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [31:0]   wd
);
  logic [31:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    rd0 <= mem[ra0];
    rd1 <= mem[ra1];
  end
endmodule
