// rev_csa_sum: reversible multi-operand adder, sum = ops[0] + ... + ops[N-1]
// modulo 2^W, built only from TSG gates.
//
// The operands are accumulated in carry-save form by a chain of N-2 rev_csa
// rows (row k adds operand k+2 to the running sum and carry vectors); a
// rev_ripple_adder resolves the final sum and carry vectors. Used by the
// reversible build of mult12x12 to add the nine 4x4 cell products.
// Timing: purely combinational, N-2 gate delays plus a W-bit ripple.
module rev_csa_sum #(
  parameter int unsigned N = 9,   // number of operands, at least 3
  parameter int unsigned W = 24   // operand and result width
) (
  input  logic [W-1:0] ops [N],
  output logic [W-1:0] sum
);
  logic [W-1:0] s [N-2];
  logic [W-1:0] c [N-2];
  logic         cout;  // carry beyond 2^W, dropped (modulo 2^W result)

  for (genvar k = 0; k < N - 2; k++) begin : g_row
    if (k == 0) begin : g_first
      rev_csa #(.W(W)) u_csa (.x(ops[0]), .y(ops[1]), .z(ops[2]), .s(s[0]), .c(c[0]));
    end else begin : g_next
      rev_csa #(.W(W)) u_csa (.x(s[k-1]), .y({c[k-1][W-2:0], 1'b0}), .z(ops[k+2]),
                              .s(s[k]), .c(c[k]));
    end
  end

  rev_ripple_adder #(.W(W)) u_cpa (.a(s[N-3]), .b({c[N-3][W-2:0], 1'b0}), .cin(1'b0),
                                   .s(sum), .cout(cout));
endmodule
