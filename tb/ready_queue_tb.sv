// ready_queue_tb: random pushes (up to two per cycle), pops, clears and
// rewinds against a queue model.
module ready_queue_tb;
  logic clk = 0, clr, rewind, pop, nonempty; logic [1:0] push;
  logic [4:0] din [2]; logic [4:0] dout; logic [5:0] count;
  int checks = 0, failures = 0;
  ready_queue #(.W(5), .DEPTH(32), .NPUSH(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [4:0] q[$], hist[$];
  task automatic chk(logic [31:0] got, logic [31:0] exp, string s);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask
  initial begin
    clr = 1; rewind = 0; push = 0; pop = 0; din[0] = 0; din[1] = 0;
    @(negedge clk); clr = 0;
    for (int n = 0; n < 6000; n++) begin
      clr = ($urandom_range(0, 300) == 0);
      rewind = !clr && ($urandom_range(0, 100) == 0) && hist.size() <= 32;
      push[0] = $urandom_range(0, 2) == 0; push[1] = $urandom_range(0, 3) == 0;
      if (hist.size() + 2 > 32) push = 0;       // keep rewind exact: no wrap since clr
      if (q.size() + 2 > 32) push = 0;
      din[0] = 5'($urandom); din[1] = 5'($urandom);
      pop = (q.size() > 0) && $urandom_range(0, 1);
      #1;
      chk(count, q.size(), $sformatf("count n=%0d", n));
      chk(nonempty, q.size() != 0, "nonempty");
      if (q.size() != 0) chk(dout, q[0], $sformatf("head n=%0d", n));
      @(negedge clk);
      if (clr) begin q = {}; hist = {}; end
      else if (rewind) q = hist;
      else begin
        if (pop) void'(q.pop_front());
        if (push[0]) begin q.push_back(din[0]); hist.push_back(din[0]); end
        if (push[1]) begin q.push_back(din[1]); hist.push_back(din[1]); end
      end
      if (hist.size() >= 30) begin clr = 1; @(negedge clk); q = {}; hist = {}; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
