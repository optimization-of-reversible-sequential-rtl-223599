// tb_rev_d_latch: self-check of the one-gate reversible D latch.
// A reference bit tracks what the latch should hold: it takes d whenever e
// is 1 and is left alone when e is 0. The testbench first loads a known
// value, because the latch has no reset. It then runs directed cases and
// random (e, d) steps. After each step the inputs settle, and it checks q,
// g1 = e and g2 (EQ xor E'D, which settles to d in both modes). It counts
// transparent steps and holds in which d differed from the stored bit. If
// either never happened, that counts as a failure.
module tb_rev_d_latch;
  logic e, d, q, g1, g2;
  logic exp_q;
  int   checks = 0, failures = 0;
  int   n_transparent = 0, n_hold_blocked = 0;

  rev_d_latch dut (.e(e), .d(d), .q(q), .g1(g1), .g2(g2));

  task automatic step(input logic ne, input logic nd);
    e = ne; d = nd;
    #1;
    if (e) begin
      exp_q = d;
      n_transparent++;
    end else if (d != exp_q) begin
      n_hold_blocked++;
    end
    checks++;
    if (q != exp_q) begin
      failures++;
      $display("FAIL q: e=%0b d=%0b q=%0b expected %0b", e, d, q, exp_q);
    end
    checks++;
    if (g1 != e || g2 != (e ? exp_q : d)) begin
      failures++;
      $display("FAIL garbage: e=%0b d=%0b g1=%0b g2=%0b", e, d, g1, g2);
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
    step(1'b1, 1'b0);              // load 0
    step(1'b1, 1'b1);              // transparent: follows d
    step(1'b0, 1'b1);              // close with 1 stored
    step(1'b0, 1'b0);              // d changes, q must hold 1
    step(1'b1, 1'b0);              // open: 0
    step(1'b0, 1'b0);
    step(1'b0, 1'b1);              // hold 0 against d = 1
    repeat (2000) step(1'($urandom_range(1)), 1'($urandom_range(1)));
    if (n_transparent == 0) begin failures++; $display("FAIL no transparent step"); end
    if (n_hold_blocked == 0) begin failures++; $display("FAIL no blocked hold"); end
    $display("transparent=%0d held_against_d=%0d", n_transparent, n_hold_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
