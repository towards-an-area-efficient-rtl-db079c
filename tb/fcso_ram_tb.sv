// fcso_ram_tb: random sets, flash clears and reads of the FC-SO-RAM against
// a bit-vector model.
module fcso_ram_tb;
  logic clk = 0, clr, we; logic [3:0] wa, ra, ra2; logic rd, rd2;
  logic [15:0] model;
  int checks = 0, failures = 0;
  fcso_ram #(.DEPTH(16)) dut (.clk, .clr, .we, .wa, .ra, .rd, .ra2, .rd2);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    clr = 1; we = 0; wa = 0; ra = 0; ra2 = 0;
    @(negedge clk); clr = 0; model = '0;
    for (int n = 0; n < 2000; n++) begin
      clr = ($urandom_range(0, 40) == 0); we = $urandom_range(0, 1);
      wa = 4'($urandom); ra = 4'($urandom); ra2 = 4'($urandom);
      #1;
      checks++; if (rd !== model[ra] || rd2 !== model[ra2]) begin failures++;
        $display("FAIL n=%0d ra=%0d rd=%0d exp=%0d", n, ra, rd, model[ra]); end
      @(negedge clk);
      if (clr) model = '0; else if (we) model[wa] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
