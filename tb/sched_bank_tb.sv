// sched_bank_tb: scheduler bank against a reference model of decoded and
// active ready state, plus the worked ADD example (operand #1 then
// operand #0 arrives: 'b1100 -> 'b1101 -> 'b1111 and READY).
module sched_bank_tb;
  import edge_pkg::*;
  logic clk = 0, blk_reset, blk_refresh, dc_we, evt_valid, ready, dc_late_ready;
  logic [3:0] dc_iid, evt_iid; rdys_t dc_drdys, evt_rdys;
  int checks = 0, failures = 0;
  sched_bank dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic  mdv [16], mav [16];
  rdys_t md [16], ma [16];
  logic  exp_ready, exp_late;
  rdys_t prev, nxt, dd;

  task automatic idle(); dc_we = 0; evt_valid = 0; blk_reset = 0; blk_refresh = 0; endtask
  task automatic chk(logic got, logic exp, string s);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask

  initial begin
    idle(); blk_reset = 1; dc_iid = 0; evt_iid = 0; dc_drdys = 0; evt_rdys = 0;
    @(negedge clk); idle();
    // worked example: ADD at bank-IID 1 decoded as 'b1100
    dc_we = 1; dc_iid = 1; dc_drdys = 4'b1100; @(negedge clk); idle();
    evt_valid = 1; evt_iid = 1; evt_rdys = 4'b0001; #1 chk(ready, 0, "ADD after op1");
    @(negedge clk); evt_rdys = 4'b0010; #1 chk(ready, 1, "ADD after op0");
    @(negedge clk); evt_rdys = 4'b0010; #1 chk(ready, 0, "no reissue");
    @(negedge clk); idle();
    // refresh clears active state: the ADD needs both operands again
    blk_refresh = 1; @(negedge clk); idle();
    evt_valid = 1; evt_iid = 1; evt_rdys = 4'b0010; #1 chk(ready, 0, "after refresh op0");
    @(negedge clk); evt_rdys = 4'b0001; #1 chk(ready, 1, "after refresh op1");
    @(negedge clk); idle();
    // reset clears decoded state: events alone never make it ready
    blk_reset = 1; @(negedge clk); idle();
    evt_valid = 1; evt_iid = 1; evt_rdys = 4'b0011; #1 chk(ready, 0, "undecoded");
    @(negedge clk); idle();
    // decode after the operands arrived: late ready
    dc_we = 1; dc_iid = 1; dc_drdys = 4'b1100; #1 chk(dc_late_ready, 1, "late ready");
    @(negedge clk); idle();
    blk_reset = 1; @(negedge clk); idle();
    for (int i = 0; i < 16; i++) begin mdv[i] = 0; mav[i] = 0; md[i] = 0; ma[i] = 0; end
    // random traffic against the model
    for (int n = 0; n < 5000; n++) begin
      blk_reset   = ($urandom_range(0, 200) == 0);
      blk_refresh = !blk_reset && ($urandom_range(0, 150) == 0);
      dc_we = $urandom_range(0, 3) == 0; dc_iid = 4'($urandom);
      dc_drdys = {2'b11, 2'($urandom)};
      if ($urandom_range(0, 3) == 0) dc_drdys[3:2] = $urandom_range(0, 1) ? 2'b01 : 2'b10;
      evt_valid = $urandom_range(0, 1); evt_iid = 4'($urandom);
      evt_rdys = 4'b0001 << $urandom_range(0, 3);
      // model
      dd   = (dc_we && dc_iid == evt_iid) ? dc_drdys : md[evt_iid];
      prev = (((mdv[evt_iid] || (dc_we && dc_iid == evt_iid))) ? dd : 4'b0) | (mav[evt_iid] ? ma[evt_iid] : 4'b0);
      nxt  = prev | evt_rdys;
      exp_ready = evt_valid && (&nxt) && !(&prev);
      exp_late  = dc_we && !(evt_valid && dc_iid == evt_iid) && mav[dc_iid] && !(&dc_drdys)
                  && (&(dc_drdys | ma[dc_iid]));
      #1 chk(ready, exp_ready, $sformatf("ready n=%0d", n));
      chk(dc_late_ready, exp_late, $sformatf("late n=%0d", n));
      @(negedge clk);
      if (dc_we) begin md[dc_iid] = dc_drdys; end
      if (evt_valid) ma[evt_iid] = nxt;
      if (blk_reset) for (int i = 0; i < 16; i++) begin mdv[i] = 0; mav[i] = 0; end
      else begin
        if (dc_we) mdv[dc_iid] = 1;
        if (blk_refresh) for (int i = 0; i < 16; i++) mav[i] = 0;
        else if (evt_valid) mav[evt_iid] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
