// rev_csa: W-bit reversible carry-save (3:2) adder row: x + y + z = s + 2*c.
//
// One TSG gate per bit used as a full adder (C = 0, D = z): R is the sum bit,
// S the carry bit; P and Q are garbage outputs. Used to reduce the operands of
// the reversible Adder 2 before its ripple stage.
// Timing: purely combinational, one gate delay.
module rev_csa #(
  parameter int unsigned W = 26
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] s,
  output logic [W-1:0] c   // carry bits, weight 2^(i+1)
);
  logic [W-1:0] g_p, g_q;  // garbage outputs

  for (genvar i = 0; i < W; i++) begin : g_fa
    tsg_gate u_tsg (.a(x[i]), .b(y[i]), .c(1'b0), .d(z[i]),
                    .p(g_p[i]), .q(g_q[i]), .r(s[i]), .s(c[i]));
  end
endmodule
