// tb_sayem_gate: exhaustive self-check of the Sayem gate against its
// published truth table. Each entry of TRUTH holds the four outputs
// (P,Q,R,S) for input ABCD = index, copied row by row from that table. The
// testbench also checks that no output vector repeats (reversibility), the
// NAND tie-off (C=0, D=1) and the D-latch tie-off (A=E, B=Q, C=D, D=0).
module tb_sayem_gate;
  localparam logic [3:0] TRUTH [16] = '{
    4'b0000, 4'b0011, 4'b0001, 4'b0010,
    4'b0110, 4'b0101, 4'b0111, 4'b0100,
    4'b1000, 4'b1011, 4'b1110, 4'b1101,
    4'b1001, 4'b1010, 4'b1111, 4'b1100
  };

  logic a, b, c, d, p, q, r, s;
  int   checks = 0, failures = 0;
  bit   seen [16];

  sayem_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s in=%0b%0b%0b%0b out=%0b%0b%0b%0b", what, a, b, c, d, p, q, r, s);
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
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check({p, q, r, s} == TRUTH[v], "truth table row");
      check(!seen[{p, q, r, s}], "unique output");
      seen[{p, q, r, s}] = 1'b1;
    end
    // universal-gate use: C=0, D=1 gives NAND(A,B) on S
    c = 1'b0; d = 1'b1;
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v); #1;
      check(s == !(a && b), "NAND");
    end
    // latch use: (E, Q, D, 0) gives DE + E'Q on outputs 2 and 3
    d = 1'b0;
    for (int v = 0; v < 8; v++) begin
      logic e, st, dat;
      {e, st, dat} = 3'(v);
      a = e; b = st; c = dat; #1;
      check(q == (e ? dat : st) && r == q, "D-latch next state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
