// full_adder: one-bit full adder, the F.A. cell of the dedicated 4x4 multiplier.
// sum = a ^ b ^ ci, carry-out = majority(a, b, ci). Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  assign s  = a ^ b ^ ci;
  assign co = (a & b) | (ci & (a ^ b));
endmodule
