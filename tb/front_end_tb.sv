// front_end_tb: fetches a 7-instruction block and checks that the header is
// read, that instructions arrive two per clock with their IIDs in the even
// and odd slots, that the odd slot is off past the end, and the timing:
// first pair decoded three cycles after start, the block done four cycles
// later.
module front_end_tb;
  import edge_pkg::*;
  import edge_asm_pkg::*;
  logic clk = 0, rst = 1, start = 0; logic [31:0] blk_addr = 32'd100;
  logic imem_we = 0; logic [11:0] imem_wa = 0; logic [31:0] imem_wd = 0;
  logic dc_we [2]; decoded_t dc_d [2]; rdys_t dc_drdys [2];
  logic [5:0] hdr_ninsn, hdr_nwr, hdr_nst; logic done;
  int checks = 0, failures = 0, cyc = 0, t0 = 0, first = -1, pairs = 0, tdone = -1;
  logic [31:0] prog [7];
  front_end dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(int got, int exp, string s);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask
  always @(negedge clk) if (!rst) begin
    cyc++;
    if (dc_we[0]) begin
      if (first < 0) first = cyc - t0;
      chk(int'(dc_d[0].iid), 2 * pairs, "even iid");
      chk(int'(dc_d[0].iid[0]), 0, "even slot parity");
      chk(int'(dc_d[0].imm), int'(prog[2*pairs][13:9]), "even payload");
      if (2 * pairs + 1 < 7) begin
        chk(int'(dc_we[1]), 1, "odd slot on");
        chk(int'(dc_d[1].iid), 2 * pairs + 1, "odd iid");
        chk(int'(dc_d[1].imm), int'(prog[2*pairs+1][13:9]), "odd payload");
      end else chk(int'(dc_we[1]), 0, "odd slot off past end");
      pairs++;
    end
    if (done && tdone < 0 && t0 > 0) tdone = cyc - t0;
  end
  initial begin
    for (int i = 0; i < 7; i++) prog[i] = read(i + 3, tL(0));
    @(negedge clk);
    imem_we = 1; imem_wa = 100; imem_wd = hdr(7, 2, 1); @(negedge clk);
    for (int i = 0; i < 7; i++) begin imem_wa = 12'(101 + i); imem_wd = prog[i]; @(negedge clk); end
    imem_we = 0; rst = 0;
    @(negedge clk);
    start = 1; t0 = cyc + 1; @(negedge clk); start = 0;
    repeat (12) @(negedge clk);
    chk(int'(hdr_ninsn), 7, "header count"); chk(int'(hdr_nwr), 2, "header writes"); chk(int'(hdr_nst), 1, "header stores");
    chk(pairs, 4, "pairs decoded");
    chk(first, 3, "first pair latency");
    chk(tdone, 7, "done latency (two instructions per clock)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
