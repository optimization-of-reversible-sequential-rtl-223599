// sayem_gate: the 4x4 one-through reversible gate ("Sayem gate", SG) that the
// latches are built from.
//
// Outputs, with inputs (A, B, C, D):
//   P = A
//   Q = A'B xor AC          (a 2:1 multiplexer: B when A=0, C when A=1)
//   R = A'B xor AC xor D    (the same value, flipped by D)
//   S = AB xor A'C xor D    (the other leg of the multiplexer, flipped by D)
// Each of the 16 input vectors maps to a different output vector, so the gate
// is reversible. With A = enable, B = fed-back state and C = data, Q and R
// both compute the D-latch next state DE + E'Q, which is why one SG is a
// whole D latch. With C=0 and D=1, S is NAND(A,B), which makes the gate
// universal.
//
// Interface: inputs a, b, c, d; outputs p, q, r, s. Purely combinational,
// one gate level. The gate has no loop of its own. A combinational loop
// that a tool reports through `mux` comes from a latch wiring an output
// back to input b, and that loop is the latch's storage. The equations are the published gate definition; the
// output names p..s are this design's (the source only numbers them).
module sayem_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  logic mux;  // A'B xor AC

  assign mux = (~a & b) ^ (a & c);
  assign p   = a;
  assign q   = mux;
  assign r   = mux ^ d;
  assign s   = (a & b) ^ (~a & c) ^ d;
endmodule
