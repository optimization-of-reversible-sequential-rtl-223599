// tb_sg_nand: exhaustive self-check of the Sayem gate wired as a NAND.
// Expects y_n = not(a and b) and garbage g = {not(A'B), A'B, A} for all four
// input pairs.
module tb_sg_nand;
  logic       a, b, y_n;
  logic [2:0] g;
  int         checks = 0, failures = 0;

  sg_nand dut (.a(a), .b(b), .y_n(y_n), .g(g));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      logic nb;
      {a, b} = 2'(v);
      #1;
      nb = !a && b;
      checks++;
      if (y_n != !(a && b)) begin
        failures++;
        $display("FAIL nand a=%0b b=%0b y_n=%0b", a, b, y_n);
      end
      checks++;
      if (g != {!nb, nb, a}) begin
        failures++;
        $display("FAIL garbage a=%0b b=%0b g=%b", a, b, g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
