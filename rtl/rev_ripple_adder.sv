// rev_ripple_adder: W-bit reversible ripple-carry adder, {cout, s} = a + b + cin.
//
// A chain of W TSG gates, each used as a full adder (C = 0, D = carry-in,
// R = sum, S = carry-out); P and Q of every gate are garbage outputs. It is the
// simplest reversible parallel adder built from the TSG full adder and serves
// as the final carry-propagate stage of the reversible adders of the CIFM.
// Timing: purely combinational, W gate delays.
module rev_ripple_adder #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0]   c;
  logic [W-1:0] g_p, g_q;  // garbage outputs

  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_fa
    tsg_gate u_tsg (.a(a[i]), .b(b[i]), .c(1'b0), .d(c[i]),
                    .p(g_p[i]), .q(g_q[i]), .r(s[i]), .s(c[i+1]));
  end
  assign cout = c[W];
endmodule
