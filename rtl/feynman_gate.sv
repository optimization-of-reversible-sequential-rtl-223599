// feynman_gate: 2x2 reversible Feynman (CNOT) gate.
//
// The input A passes straight through to P, and Q is A xor B. With B tied to
// 0 the gate copies A; with B tied to 1 it gives A and its complement, which
// is how the latches with a complement output use it.
//
// Interface: inputs a, b; outputs p = a, q = a ^ b. Purely combinational,
// one gate level. The equations are the standard Feynman gate definition;
// the port names follow the usual A/B and P/Q labelling.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  assign p = a;
  assign q = a ^ b;
endmodule
