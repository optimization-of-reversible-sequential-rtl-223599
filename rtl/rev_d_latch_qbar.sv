// rev_d_latch_qbar: reversible D latch with outputs Q and not-Q, built from
// one Sayem gate (SG) and one Feynman gate (FG).
//
// The SG holds the bit just as in rev_d_latch. Its inputs are (E, Q, D, 0),
// and its third output is fed back to its second input. The SG's second
// output (the next state DE + E'Q) drives an FG whose other input is tied to
// 1. The FG returns the value on P (the Q pin) and its complement on Q (the
// q_bar pin). Totals: two gates, two garbage outputs (SG outputs 1 and 4)
// and a path of two gates.
//
// Interface: e = enable (transparent while 1), d = data, q and q_bar =
// stored value and complement, g1/g2 = garbage. Timing: level-sensitive and
// unclocked. While e=1, q follows d through two gates. When e falls, q keeps
// the value d had. There is no reset.
//
// The feedback wire q_fb is a deliberate combinational loop: it is the
// storage of the latch, and loop or latch reports on it describe the intended
// behaviour. The structure follows the published design. The published
// figure calls the complement output "Q+"; it is named q_bar here.
module rev_d_latch_qbar (
  input  logic e,
  input  logic d,
  output logic q,
  output logic q_bar,
  output logic g1,
  output logic g2
);
  logic q_fb;    // SG output 3, fed back to SG input 2
  logic q_next;  // SG output 2, into the FG

  sayem_gate u_sg (
    .a (e),
    .b (q_fb),
    .c (d),
    .d (1'b0),
    .p (g1),
    .q (q_next),
    .r (q_fb),
    .s (g2)
  );

  feynman_gate u_fg (
    .a (q_next),
    .b (1'b1),
    .p (q),
    .q (q_bar)
  );
endmodule
