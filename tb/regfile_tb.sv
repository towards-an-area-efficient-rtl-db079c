// regfile_tb: random writes and two-port reads against a model.
module regfile_tb;
  logic clk = 0, we; logic [4:0] wa, ra, dbg_ra; logic [31:0] wd, rd, dbg_rd;
  logic [31:0] m [32];
  int checks = 0, failures = 0;
  regfile dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    we = 1;
    for (int i = 0; i < 32; i++) begin wa = 5'(i); wd = 32'(i * 3); m[i] = 32'(i * 3); @(negedge clk); end
    for (int n = 0; n < 3000; n++) begin
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom; ra = 5'($urandom); dbg_ra = 5'($urandom);
      #1 checks++;
      if (rd !== m[ra] || dbg_rd !== m[dbg_ra]) begin failures++; $display("FAIL n=%0d", n); end
      @(negedge clk);
      if (we) m[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
