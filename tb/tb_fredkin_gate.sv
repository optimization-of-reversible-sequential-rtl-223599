// tb_fredkin_gate: exhaustive self-check of the Fredkin gate.
// The expected value is the controlled swap: B and C pass through when A is
// 0 and trade places when A is 1, with A itself passed to P. The testbench
// also checks that all eight output vectors differ, and that the gate forms
// JQ' + K'Q when given (Q, J, not K), as the JK latches use it.
module tb_fredkin_gate;
  logic a, b, c, p, q, r;
  int   checks = 0, failures = 0;
  bit   seen [8];

  fredkin_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b c=%0b -> %0b%0b%0b", what, a, b, c, p, q, r);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_q, exp_r;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      if (a) begin exp_q = c; exp_r = b; end
      else   begin exp_q = b; exp_r = c; end
      check(p == a, "P");
      check(q == exp_q, "Q");
      check(r == exp_r, "R");
      check(!seen[{p, q, r}], "unique output");
      seen[{p, q, r}] = 1'b1;
    end
    // JK use: a = Q, b = J, c = not K  ->  q = JQ' + K'Q
    for (int v = 0; v < 8; v++) begin
      logic st, j, k;
      {st, j, k} = 3'(v);
      a = st; b = j; c = !k;
      #1;
      check(q == ((j && !st) || (!k && st)), "JQ'+K'Q");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
