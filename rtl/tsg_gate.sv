// tsg_gate: the 4x4 reversible TSG gate.
//
//   P = A
//   Q = A'C' ^ B'
//   R = (A'C' ^ B') ^ D
//   S = (A'C' ^ B')D ^ (AB ^ C)
//
// The equations are those printed with the gate symbol in the paper. With C = 0
// and D = carry-in the gate is a full adder: R = A^B^Cin is the sum, S =
// (A^B)Cin ^ AB the carry, P and Q are the two garbage outputs. The mapping is
// one-to-one on the 16 input vectors. Purely combinational.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  logic t;
  assign t = (~a & ~c) ^ ~b;
  assign p = a;
  assign q = t;
  assign r = t ^ d;
  assign s = (t & d) ^ ((a & b) ^ c);
endmodule
