// lsq: non-speculative load-store queue.
//
// Memory instructions must reach memory in program order, which within a
// block is IID order. The decoder marks memory instructions (memmask). A
// load or store that becomes ready is not executed at once: it is deferred
// here. Each cycle the lowest-numbered memory instruction not yet released
// is the next in program order; when it has been deferred, it is released
// (rel, rel_iid) to the load/store ready queue, from which it issues to
// memory. The decoder writes in IID order, so no undecoded memory
// instruction can precede a decoded one.
//
// Refresh clears the deferred/released state and keeps memmask; block reset
// clears everything. A predicated-off load or store would block later ones:
// this simple queue requires every memory instruction of a block to
// execute. That restriction is this implementation's.
module lsq
  import edge_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic clk,
  input  logic blk_reset,
  input  logic blk_refresh,
  input  logic dc_we  [2],
  input  iid_t dc_iid [2],
  input  logic dc_mem [2],
  input  logic defer,
  input  iid_t defer_iid,
  output logic rel,
  output iid_t rel_iid
);
  logic [N-1:0] memmask, deferred, released, pend;
  logic         found;

  always_comb begin
    pend    = memmask & ~released;
    found   = 1'b0;
    rel_iid = '0;
    for (int i = N - 1; i >= 0; i--)
      if (pend[i]) begin found = 1'b1; rel_iid = iid_t'(i); end
    rel = found && deferred[rel_iid];
  end

  always_ff @(posedge clk) begin
    if (blk_reset) begin
      memmask <= '0; deferred <= '0; released <= '0;
    end else if (blk_refresh) begin
      deferred <= '0; released <= '0;
    end else begin
      for (int k = 0; k < 2; k++)
        if (dc_we[k] && dc_mem[k]) memmask[dc_iid[k]] <= 1'b1;
      if (defer) deferred[defer_iid] <= 1'b1;
      if (rel)   released[rel_iid]   <= 1'b1;
    end
  end
endmodule
