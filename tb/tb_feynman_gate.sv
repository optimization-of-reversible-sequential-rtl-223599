// tb_feynman_gate: exhaustive self-check of the Feynman gate.
// Applies all four input pairs and expects P = A and Q = 1 exactly when A and
// B differ. It also checks that the four output pairs are all different,
// i.e. that the gate is reversible. Prints one TB_RESULT line.
module tb_feynman_gate;
  logic a, b, p, q;
  int   checks = 0, failures = 0;
  bit   seen [4];

  feynman_gate dut (.a(a), .b(b), .p(p), .q(q));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b p=%0b q=%0b", what, a, b, p, q);
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
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      check(p == a, "P");
      check(q == (a != b), "Q");
      check(!seen[{p, q}], "unique output");
      seen[{p, q}] = 1'b1;
    end
    // tie-offs the latches rely on: B=1 gives the complement, B=0 a copy
    b = 1'b1;
    for (int v = 0; v < 2; v++) begin
      a = 1'(v); #1;
      check(p == a && q == !a, "complement with B=1");
    end
    b = 1'b0;
    for (int v = 0; v < 2; v++) begin
      a = 1'(v); #1;
      check(p == a && q == a, "copy with B=0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
