// icache_data_tb: writes random words and reads them back through both
// ports, one cycle after the address.
module icache_data_tb;
  logic clk = 0, we = 0; logic [11:0] ra0 = 0, ra1 = 0, wa = 0; logic [31:0] rd0, rd1, wd = 0;
  logic [31:0] m [4096];
  int checks = 0, failures = 0;
  icache_data dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 4096; i++) begin
      we = 1; wa = 12'(i); wd = $urandom; m[i] = wd; @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 3000; n++) begin
      ra0 = 12'($urandom); ra1 = 12'($urandom);
      @(negedge clk); checks++;
      if (rd0 !== m[ra0] || rd1 !== m[ra1]) begin failures++; $display("FAIL %0d %0d", ra0, ra1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
