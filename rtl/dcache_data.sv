// dcache_data: data cache data array, WORDS x 32, one read/write port.
//
// A single-port block RAM. With en set, a write (we) stores wd at addr; a
// read returns mem[addr] on rd the following cycle (read-first). Only the
// data array is built: there are no tags or miss handling, so it acts as the
// data memory. Word accesses only.
module dcache_data #(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wd,
  output logic [31:0]   rd
);
  logic [31:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wd;
      rd <= mem[addr];
    end
  end
endmodule
