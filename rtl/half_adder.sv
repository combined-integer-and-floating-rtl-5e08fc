// half_adder: one-bit half adder (sum = a ^ b, carry = a & b), the H.A. cell of
// the dedicated 4x4 multiplier. Purely combinational.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
