// lsq_tb: memory instructions at scattered IIDs become ready in random
// order; the queue must release them one by one in IID (program) order, and
// again after a refresh.
module lsq_tb;
  import edge_pkg::*;
  logic clk = 0, blk_reset = 0, blk_refresh = 0;
  logic dc_we [2]; iid_t dc_iid [2]; logic dc_mem [2];
  logic defer = 0; iid_t defer_iid = 0; logic rel; iid_t rel_iid;
  int checks = 0, failures = 0;
  lsq dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int mem_iids [$]; int rels [$];
  always @(posedge clk) if (rel) rels.push_back(int'(rel_iid));
  initial begin
    for (int k = 0; k < 2; k++) begin dc_we[k] = 0; dc_iid[k] = 0; dc_mem[k] = 0; end
    blk_reset = 1; @(negedge clk); blk_reset = 0;
    for (int round = 0; round < 20; round++) begin
      int order [$];
      mem_iids = {}; rels = {};
      blk_reset = 1; @(negedge clk); blk_reset = 0;
      for (int p = 0; p < 16; p++) begin          // decode 32 instructions
        for (int k = 0; k < 2; k++) begin
          dc_we[k] = 1; dc_iid[k] = 5'(2 * p + k); dc_mem[k] = ($urandom_range(0, 3) == 0);
          if (dc_mem[k]) mem_iids.push_back(2 * p + k);
        end
        @(negedge clk);
      end
      for (int k = 0; k < 2; k++) dc_we[k] = 0;
      for (int rep = 0; rep < 2; rep++) begin
        order = mem_iids; order.shuffle();
        rels = {};
        foreach (order[i]) begin
          defer = 1; defer_iid = 5'(order[i]); @(negedge clk);
          defer = 0; repeat ($urandom_range(0, 2)) @(negedge clk);
        end
        repeat (40) @(negedge clk);
        checks++;
        if (rels != mem_iids) begin failures++; $display("FAIL round %0d: %p vs %p", round, rels, mem_iids); end
        blk_refresh = 1; @(negedge clk); blk_refresh = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
