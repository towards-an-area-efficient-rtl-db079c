// dcache_data_tb: random reads and writes through the single port against
// a model; read data is checked the cycle after the address.
module dcache_data_tb;
  logic clk = 0, en = 0, we = 0; logic [11:0] addr = 0; logic [31:0] wd = 0, rd, e;
  logic [31:0] m [4096];
  int checks = 0, failures = 0;
  dcache_data dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 4096; i++) begin
      en = 1; we = 1; addr = 12'(i); wd = 32'(i * 7); m[i] = wd; @(negedge clk);
    end
    for (int n = 0; n < 4000; n++) begin
      en = 1; we = $urandom_range(0, 1); addr = 12'($urandom_range(0, 63)); wd = $urandom;
      e = m[addr];
      @(negedge clk);
      if (we) m[addr] = wd;
      else begin checks++;
        if (rd !== e) begin failures++; $display("FAIL addr %0d rd %h exp %h", addr, rd, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
