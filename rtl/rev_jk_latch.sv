// rev_jk_latch: reversible JK latch with output Q, built from one Fredkin
// gate (FRG) and one Sayem gate (SG).
//
// The JK-latch next state is (JQ' + K'Q)E + E'Q. The FRG gets (Q, J, K') on
// its three inputs. Its second output is Q'J xor QK', which equals JQ' + K'Q
// because the two terms never overlap. That value is the D input of an SG
// D latch with inputs (E, Q, JQ'+K'Q, 0). The SG's second output (the new
// state) is fed back to the FRG's control input. Its third output is fed back
// to its own second input. The FRG's pass-through output P is the Q pin. The
// garbage is g1 = FRG output 3, g2 = SG output 1 and g3 = SG output 4: two
// gates, three garbage outputs, and a path of two gates from J or K to the
// state. K is complemented by a plain inverter, which is not counted as a
// gate.
//
// Interface: e = enable, j/k = set/reset, q = stored value, g1..g3 = garbage.
// Timing: level-sensitive and unclocked. While e=1: j=1,k=0 sets q;
// j=0,k=1 clears it; j=k=0 holds it. When e=0 the latch holds. There is no
// reset.
//
// Limit: e=j=k=1 asks the loop to toggle with nothing to stop it. Like any
// level-sensitive JK latch, the loop then has no stable state (race-around)
// and oscillates. The source does not discuss this case. An assertion here
// reports it, and users must keep out of it.
//
// The feedback wires are deliberate combinational loops that hold the state.
// Loop or latch reports on q_state and q_fb describe the intended storage.
// The gates and their wiring follow the published design; the assertion and
// the pin names are this design's additions.
module rev_jk_latch (
  input  logic e,
  input  logic j,
  input  logic k,
  output logic q,
  output logic g1,
  output logic g2,
  output logic g3
);
  logic q_state;  // SG output 2, fed back to the FRG control input
  logic q_fb;     // SG output 3, fed back to SG input 2
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
    .q (q_state),
    .r (q_fb),
    .s (g3)
  );

  always_comb begin
    assert (!(e && j && k))
      else $error("rev_jk_latch: e=j=k=1 has no stable state (race-around)");
  end
endmodule
