// multiplier_tb: random products, checked one cycle after the operands.
module multiplier_tb;
  logic clk = 0, en; logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  multiplier dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    en = 1; a = 0; b = 0; e = 0; @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      a = $urandom; b = (n % 3 == 0) ? 32'($urandom_range(0, 100)) : $urandom;
      en = 1;
      @(negedge clk);
      e = a * b; checks++;
      if (y !== e) begin failures++; $display("FAIL %h*%h=%h exp %h", a, b, y, e); end
      // hold: with en low the product stays
      en = 0; a = $urandom; @(negedge clk); checks++;
      if (y !== e) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
