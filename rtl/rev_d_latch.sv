// rev_d_latch: reversible D latch with output Q, built from a single Sayem
// gate (SG).
//
// The SG gets (E, Q, D, 0) on its four inputs. Its second and third outputs
// then both equal E'Q xor ED = DE + E'Q, the D-latch characteristic
// equation. The third output is wired back to the second input, and that
// loop holds the stored bit; the second output is the Q pin. The first
// output (E) and the fourth (EQ xor E'D) are garbage. That makes one gate,
// two garbage outputs and a path of one gate.
//
// Interface: e = enable (transparent while 1), d = data, q = stored value,
// g1/g2 = garbage. Timing: level-sensitive and unclocked. While e=1, q
// follows d through one gate. When e falls, q keeps the value d had. There is
// no reset: q is unknown until e has been 1 once.
//
// The feedback wire is a deliberate combinational loop. It is how this
// circuit stores its bit, so tools that report a combinational loop or latch
// through q_fb are describing the intended storage. The gate, its input
// assignment and the loop follow the published design; the pin names are this
// design's own.
module rev_d_latch (
  input  logic e,
  input  logic d,
  output logic q,
  output logic g1,
  output logic g2
);
  logic q_fb;  // SG output 3, fed back to SG input 2

  sayem_gate u_sg (
    .a (e),
    .b (q_fb),
    .c (d),
    .d (1'b0),
    .p (g1),
    .q (q),
    .r (q_fb),
    .s (g2)
  );
endmodule
