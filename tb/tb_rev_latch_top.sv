// tb_rev_latch_top: end-to-end self-check of rev_latch_top at its default
// (and only) configuration.
// All five circuits are driven at once with independent random inputs, after
// a start-up step that loads a known value into each latch (none has a
// reset). Reference models give the expected outputs:
//   NAND         y_n = not(a and b)
//   D latches    state takes d while e=1 and holds while e=0; q_bar = not q
//   JK latches   while e=1: set on j=1,k=0, clear on j=0,k=1, hold on
//                j=k=0; hold while e=0; q_bar = not q.
//                e=j=k=1 (race-around) is never applied.
// Each behaviour is counted: a NAND output of 0 and of 1; for each latch,
// transparent/set/clear steps, holds with e=1, and closed steps that blocked
// a change. A behaviour that never happened counts as a failure.
module tb_rev_latch_top;
  logic       nand_a, nand_b, nand_y_n;
  logic [2:0] nand_g;
  logic       dl_e, dl_d, dl_q;
  logic [1:0] dl_g;
  logic       dlq_e, dlq_d, dlq_q, dlq_q_bar;
  logic [1:0] dlq_g;
  logic       jk_e, jk_j, jk_k, jk_q;
  logic [2:0] jk_g;
  logic       jkq_e, jkq_j, jkq_k, jkq_q, jkq_q_bar;
  logic [2:0] jkq_g;

  logic exp_dl, exp_dlq, exp_jk, exp_jkq;
  int   checks = 0, failures = 0;
  // event counters
  int   n_nand0 = 0, n_nand1 = 0;
  int   n_dl_tr = 0, n_dl_blk = 0, n_dlq_tr = 0, n_dlq_blk = 0;
  int   n_jk_set = 0, n_jk_clr = 0, n_jk_hold = 0, n_jk_blk = 0;
  int   n_jkq_set = 0, n_jkq_clr = 0, n_jkq_hold = 0, n_jkq_blk = 0;

  rev_latch_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // JK reference: returns the new state; counts the behaviour seen
  function automatic logic jk_ref(input logic st, input logic e, input logic j, input logic k,
                                  ref int set_c, ref int clr_c, ref int hold_c, ref int blk_c);
    if (e) begin
      if (j && !k)      begin set_c++;  return 1'b1; end
      else if (!j && k) begin clr_c++;  return 1'b0; end
      else              begin hold_c++; return st;   end
    end
    if ((j && !k && !st) || (!j && k && st)) blk_c++;
    return st;
  endfunction

  task automatic apply_and_check();
    #1;
    // NAND
    check(nand_y_n == !(nand_a && nand_b), "nand");
    if (nand_y_n) n_nand1++; else n_nand0++;
    // D latch, Q only
    if (dl_e) begin exp_dl = dl_d; n_dl_tr++; end
    else if (dl_d != exp_dl) n_dl_blk++;
    check(dl_q == exp_dl, "dl q");
    check(dl_g == {dl_d, dl_e}, "dl garbage");
    // D latch, Q and not-Q
    if (dlq_e) begin exp_dlq = dlq_d; n_dlq_tr++; end
    else if (dlq_d != exp_dlq) n_dlq_blk++;
    check(dlq_q == exp_dlq && dlq_q_bar == !exp_dlq, "dlq q/q_bar");
    // JK latches
    exp_jk  = jk_ref(exp_jk, jk_e, jk_j, jk_k, n_jk_set, n_jk_clr, n_jk_hold, n_jk_blk);
    exp_jkq = jk_ref(exp_jkq, jkq_e, jkq_j, jkq_k, n_jkq_set, n_jkq_clr, n_jkq_hold, n_jkq_blk);
    check(jk_q == exp_jk, "jk q");
    check(jk_g[1] == jk_e, "jk garbage g2");
    check(jkq_q == exp_jkq && jkq_q_bar == !exp_jkq, "jkq q/q_bar");
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL never happened: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // start-up: load every latch with a known value
    nand_a = 0; nand_b = 0;
    dl_e  = 1; dl_d  = 0;
    dlq_e = 1; dlq_d = 1;
    jk_e  = 1; jk_j  = 0; jk_k  = 1;
    jkq_e = 1; jkq_j = 1; jkq_k = 0;
    #1;
    exp_dl = 0; exp_dlq = 1; exp_jk = 0; exp_jkq = 1;
    apply_and_check();
    repeat (5000) begin
      {nand_a, nand_b} = 2'($urandom_range(3));
      {dl_e, dl_d}     = 2'($urandom_range(3));
      {dlq_e, dlq_d}   = 2'($urandom_range(3));
      {jk_e, jk_j, jk_k} = 3'($urandom_range(7));
      if (jk_e && jk_j && jk_k) jk_e = 1'b0;
      {jkq_e, jkq_j, jkq_k} = 3'($urandom_range(7));
      if (jkq_e && jkq_j && jkq_k) jkq_e = 1'b0;
      apply_and_check();
    end
    need(n_nand0, "NAND output 0");   need(n_nand1, "NAND output 1");
    need(n_dl_tr, "D latch transparent");  need(n_dl_blk, "D latch hold against d");
    need(n_dlq_tr, "D latch (Q/Q') transparent"); need(n_dlq_blk, "D latch (Q/Q') hold against d");
    need(n_jk_set, "JK set");  need(n_jk_clr, "JK clear");
    need(n_jk_hold, "JK enabled hold"); need(n_jk_blk, "JK closed, change blocked");
    need(n_jkq_set, "JK (Q/Q') set");  need(n_jkq_clr, "JK (Q/Q') clear");
    need(n_jkq_hold, "JK (Q/Q') enabled hold"); need(n_jkq_blk, "JK (Q/Q') closed, change blocked");
    $display("nand0=%0d nand1=%0d dl=%0d/%0d dlq=%0d/%0d jk=%0d/%0d/%0d/%0d jkq=%0d/%0d/%0d/%0d",
             n_nand0, n_nand1, n_dl_tr, n_dl_blk, n_dlq_tr, n_dlq_blk,
             n_jk_set, n_jk_clr, n_jk_hold, n_jk_blk, n_jkq_set, n_jkq_clr, n_jkq_hold, n_jkq_blk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
