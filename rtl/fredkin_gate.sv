// fredkin_gate: 3x3 reversible Fredkin gate (controlled swap).
//
// A passes through to P. When A is 0, B and C pass straight through to Q and
// R; when A is 1 they are exchanged. Written as sums of products this is
// Q = A'B xor AC and R = A'C xor AB, the form used here.
//
// Interface: inputs a, b, c; outputs p, q, r. Purely combinational, one gate
// level. The equations are the standard Fredkin gate definition.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = (~a & b) ^ (a & c);
  assign r = (~a & c) ^ (a & b);
endmodule
