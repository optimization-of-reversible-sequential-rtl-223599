// rev_jk_latch_qbar: reversible JK latch with outputs Q and not-Q, built from
// one Fredkin gate (FRG), one Sayem gate (SG) and one Feynman gate (FG).
//
// This is rev_jk_latch with an FG after the SG. The FRG, with inputs
// (Q, J, K'), forms JQ' + K'Q. The SG, with inputs (E, Q, JQ'+K'Q, 0), forms
// the new state on its second output and feeds its third output back to its
// own second input. The SG's second output drives the FG, whose other input
// is tied to 1. The FG's P output (the state) goes back to the FRG's control
// input, and its Q output is the complement pin q_bar. The Q pin is the
// FRG's pass-through output P. Totals: three gates, three garbage outputs
// (g1 = FRG output 3, g2 = SG output 1, g3 = SG output 4) and a path of
// three gates.
//
// Interface: e = enable, j/k = set/reset, q and q_bar = stored value and
// complement, g1..g3 = garbage. Timing: level-sensitive and unclocked. While
// e=1: j=1,k=0 sets q; j=0,k=1 clears it; j=k=0 holds it. When e=0 the
// latch holds. There is no reset. As for rev_jk_latch, e=j=k=1 has no stable
// state (race-around) and is flagged by an assertion.
//
// The feedback wires are deliberate combinational loops that hold the state.
// Loop or latch reports on them describe the intended storage. The structure
// follows the published design. The complement output, printed "Q+" in the
// source, is named q_bar here; the assertion is this design's addition.
module rev_jk_latch_qbar (
  input  logic e,
  input  logic j,
  input  logic k,
  output logic q,
  output logic q_bar,
  output logic g1,
  output logic g2,
  output logic g3
);
  logic q_state;  // FG output P, fed back to the FRG control input
  logic q_fb;     // SG output 3, fed back to SG input 2
  logic q_next;   // SG output 2, into the FG
  logic d_jk;     // FRG output 2: JQ' + K'Q

  fredkin_gate u_frg (
    .a (q_state),
    .b (j),
    .c (~k),
    .p (q),
    .q (d_jk),
    .r (g1)
  );

  sayem_gate u_sg (
    .a (e),
    .b (q_fb),
    .c (d_jk),
    .d (1'b0),
    .p (g2),
    .q (q_next),
    .r (q_fb),
    .s (g3)
  );

  feynman_gate u_fg (
    .a (q_next),
    .b (1'b1),
    .p (q_state),
    .q (q_bar)
  );

  always_comb begin
    assert (!(e && j && k))
      else $error("rev_jk_latch_qbar: e=j=k=1 has no stable state (race-around)");
  end
endmodule
