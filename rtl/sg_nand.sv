// sg_nand: the Sayem gate used as a two-input universal gate.
//
// Tying the SG's third input to 0 and its fourth to 1 leaves
// S = AB xor 1 = NAND(A,B) on the fourth output; the other three outputs
// (A, A'B and not A'B) are garbage. Since NAND is universal, so is the SG.
//
// Interface: inputs a, b; output y_n = ~(a & b); g[0..2] = SG outputs 1..3
// (the garbage g1..g3). Purely combinational, one gate level. The constant
// inputs follow the published configuration; packing the garbage into one
// port is this design's choice.
module sg_nand (
  input  logic       a,
  input  logic       b,
  output logic       y_n,
  output logic [2:0] g
);
  sayem_gate u_sg (
    .a (a),
    .b (b),
    .c (1'b0),
    .d (1'b1),
    .p (g[0]),
    .q (g[1]),
    .r (g[2]),
    .s (y_n)
  );
endmodule
