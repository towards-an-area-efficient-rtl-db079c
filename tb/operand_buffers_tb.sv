// operand_buffers_tb: random double writes and reads against a model.
module operand_buffers_tb;
  logic clk = 0; logic we [2]; logic [5:0] wa [2]; logic [31:0] wd [2];
  logic [4:0] ra; logic [31:0] rd_l, rd_r;
  logic [31:0] ml [32], mr [32];
  int checks = 0, failures = 0;
  operand_buffers dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < 2; k++) begin we[k] = 1; end
    for (int i = 0; i < 32; i++) begin        // initialise both buffers
      wa[0] = {1'b0, 5'(i)}; wa[1] = {1'b1, 5'(i)}; wd[0] = 32'(i); wd[1] = 32'(i + 100);
      ml[i] = 32'(i); mr[i] = 32'(i + 100); @(negedge clk);
    end
    for (int n = 0; n < 3000; n++) begin
      for (int k = 0; k < 2; k++) begin
        we[k] = $urandom_range(0, 1); wa[k] = 6'($urandom); wd[k] = $urandom;
      end
      if (wa[0] == wa[1]) we[0] = 0;
      ra = 5'($urandom);
      #1 checks++;
      if (rd_l !== ml[ra] || rd_r !== mr[ra]) begin failures++; $display("FAIL n=%0d", n); end
      @(negedge clk);
      for (int k = 0; k < 2; k++) if (we[k]) begin
        if (wa[k][5]) mr[wa[k][4:0]] = wd[k]; else ml[wa[k][4:0]] = wd[k];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
