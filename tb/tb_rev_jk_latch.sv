// tb_rev_jk_latch: self-check of the two-gate reversible JK latch.
// A reference bit tracks the expected state. While e is 1, j=1,k=0 sets it,
// j=0,k=1 clears it and j=k=0 leaves it; while e is 0 nothing changes it.
// The input e=j=k=1 is never applied: a level-sensitive JK latch has no
// stable state there (race-around). The testbench first clears the latch,
// which has no reset, then runs directed and random steps. It checks q and
// the three garbage outputs, worked out from the settled state:
// g1 = (q ? j : not k), g2 = e, g3 = (e ? q : JQ'+K'Q). It counts sets,
// clears, enabled holds and disabled holds that blocked a change, and counts
// a failure for any of them that never happened.
module tb_rev_jk_latch;
  logic e, j, k, q, g1, g2, g3;
  logic exp_q;
  int   checks = 0, failures = 0;
  int   n_set = 0, n_reset = 0, n_hold_en = 0, n_hold_blocked = 0;

  rev_jk_latch dut (.e(e), .j(j), .k(k), .q(q), .g1(g1), .g2(g2), .g3(g3));

  task automatic step(input logic ne, input logic nj, input logic nk);
    logic d_jk;
    e = ne; j = nj; k = nk;
    #1;
    if (e) begin
      if (j && !k)      begin exp_q = 1'b1; n_set++;   end
      else if (!j && k) begin exp_q = 1'b0; n_reset++; end
      else              n_hold_en++;
    end else if ((j && !k && !exp_q) || (!j && k && exp_q)) begin
      n_hold_blocked++;
    end
    d_jk = (j && !exp_q) || (!k && exp_q);
    checks++;
    if (q != exp_q) begin
      failures++;
      $display("FAIL q: e=%0b j=%0b k=%0b q=%0b expected %0b", e, j, k, q, exp_q);
    end
    checks++;
    if (g1 != (exp_q ? j : !k) || g2 != e || g3 != (e ? exp_q : d_jk)) begin
      failures++;
      $display("FAIL garbage: e=%0b j=%0b k=%0b g=%0b%0b%0b", e, j, k, g1, g2, g3);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic re, rj, rk;
    step(1'b1, 1'b0, 1'b1);        // clear
    step(1'b1, 1'b1, 1'b0);        // set
    step(1'b1, 1'b0, 1'b0);        // enabled hold of 1
    step(1'b0, 1'b0, 1'b1);        // closed: clear request ignored
    step(1'b0, 1'b1, 1'b1);        // closed: j=k=1 is harmless
    step(1'b1, 1'b0, 1'b1);        // clear
    step(1'b0, 1'b1, 1'b0);        // closed: set request ignored
    repeat (3000) begin
      {re, rj, rk} = 3'($urandom_range(7));
      if (re && rj && rk) re = 1'b0;
      step(re, rj, rk);
    end
    if (n_set == 0)          begin failures++; $display("FAIL no set"); end
    if (n_reset == 0)        begin failures++; $display("FAIL no clear"); end
    if (n_hold_en == 0)      begin failures++; $display("FAIL no enabled hold"); end
    if (n_hold_blocked == 0) begin failures++; $display("FAIL no blocked change"); end
    $display("set=%0d clear=%0d hold_enabled=%0d blocked=%0d",
             n_set, n_reset, n_hold_en, n_hold_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
