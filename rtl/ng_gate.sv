// ng_gate: the 3x3 reversible New Gate (NG).
//
//   P = A
//   Q = AB ^ C
//   R = A'C' ^ B'
//
// The equations are those printed with the gate symbol in the paper. With C = 0
// the gate is a half adder: Q = AB is the carry, R = A'^B' = A^B the sum and P
// the single garbage output. Purely combinational.
module ng_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = (a & b) ^ c;
  assign r = (~a & ~c) ^ ~b;
endmodule
