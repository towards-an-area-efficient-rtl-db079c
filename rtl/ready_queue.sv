// ready_queue: small elastic FIFO for ready IIDs and pending events.
//
// A circular buffer with read and write pointers and an occupancy count.
// Up to NPUSH entries can be pushed per cycle (lower-numbered push ports are
// written first, so they dequeue first) and one popped. The head is visible
// combinationally on dout while nonempty.
//
// rewind moves the read pointer back to the first entry written since the
// last clr, restoring everything pushed since then. The core uses it on a
// block refresh to replay the decoder-filled queues (the decoder-ready queue
// and the broadcast listener queues) without decoding the block again. The
// queue must not have wrapped since clr for rewind to be exact; with DEPTH
// equal to the window size that holds for the decoder-filled queues.
//
// Pushing into a full queue or popping an empty one is an error (asserted).
// clr and rewind take priority over push and pop in the same cycle.
module ready_queue #(
  parameter int unsigned W     = 5,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned NPUSH = 2,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             clr,
  input  logic             rewind,
  input  logic [NPUSH-1:0] push,
  input  logic [W-1:0]     din [NPUSH],
  input  logic             pop,
  output logic [W-1:0]     dout,
  output logic             nonempty,
  output logic [AW:0]      count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   written;   // entries pushed since clr (for rewind)
  logic [AW:0]   npush;

  always_comb begin
    npush = '0;
    for (int k = 0; k < int'(NPUSH); k++) npush = npush + (AW+1)'(push[k]);
  end

  assign dout     = mem[rp];
  assign nonempty = (count != 0);

  always_ff @(posedge clk) begin
    if (clr) begin
      rp <= '0; wp <= '0; count <= '0; written <= '0;
    end else if (rewind) begin
      rp    <= '0;
      count <= (written > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : written;
    end else begin
      for (int k = 0, int unsigned off = 0; k < int'(NPUSH); k++) begin
        if (push[k]) begin
          mem[AW'(wp + AW'(off))] <= din[k];
          off++;
        end
      end
      wp      <= wp + AW'(npush);
      written <= written + npush;
      rp      <= rp + AW'(pop);
      count   <= count + npush - (AW+1)'(pop);
    end
  end

  // handshake rules
  always_ff @(posedge clk) begin
    if (!clr && !rewind) begin
      assert (!(pop && count == 0)) else $error("ready_queue: pop while empty");
      assert (32'(count) + 32'(npush) - 32'(pop) <= 32'(DEPTH))
        else $error("ready_queue: overflow");
    end
  end
endmodule
