// repair_unit: the self-repair resource of one 12x12 multiply module.
//
// It holds the redundant 4x4 multiplier and the logic around it:
//   A select enable  decodes Aij (rep.a_sel) and picks that nibble of A,
//   B select enable  decodes Bij (rep.b_sel) and picks that nibble of B,
//   repair enable    E (rep.en) switches the redundant multiplier on and
//                    raises replace[] for the one cell being repaired.
// The redundant product red_p is offered to all nine cells; the cell whose
// replace bit is set drops its own output and takes red_p (that mux sits in
// mult12x12). Cell index k = 3*i + j for A nibble i and B nibble j (0 = A1/B1).
// Operand isolation: with no repair the mux feeds zeros, so the redundant
// multiplier does not toggle. The select/enable structure follows the paper's
// self-repair figure; the encoding of Aij/Bij is this design's choice.
// Timing: purely combinational.
module repair_unit
  import cifm_pkg::*;
#(
  parameter bit REVERSIBLE = 1'b0  // 1: redundant cell is the reversible 4x4 multiplier
) (
  input  logic [HALF_W-1:0] a,
  input  logic [HALF_W-1:0] b,
  input  repair_t           rep,
  output logic [7:0]        red_p,    // product of the redundant multiplier
  output logic [N_CELL-1:0] replace,  // one-hot: cell to be replaced
  output logic              red_on    // redundant multiplier powered
);
  logic [N_NIB-1:0] a_oh, b_oh;
  logic [3:0]       rx, ry;

  always_comb begin
    // A / B select enable: 2-to-3 decoders, code 3 selects nothing
    for (int i = 0; i < N_NIB; i++) begin
      a_oh[i] = rep.en && (rep.a_sel == 2'(i));
      b_oh[i] = rep.en && (rep.b_sel == 2'(i));
    end
    red_on = |a_oh && |b_oh;
    // operand mux (AND-OR of the selected nibbles)
    rx = '0;
    ry = '0;
    for (int i = 0; i < N_NIB; i++) begin
      rx |= a[i*NIB_W +: NIB_W] & {NIB_W{a_oh[i] & red_on}};
      ry |= b[i*NIB_W +: NIB_W] & {NIB_W{b_oh[i] & red_on}};
    end
    for (int i = 0; i < N_NIB; i++)
      for (int j = 0; j < N_NIB; j++)
        replace[3*i + j] = a_oh[i] & b_oh[j];
  end

  generate
    if (REVERSIBLE) begin : g_rev
      rev_mult4x4 u_red (.x(rx), .y(ry), .p(red_p));
    end else begin : g_std
      mult4x4     u_red (.x(rx), .y(ry), .p(red_p));
    end
  endgenerate
endmodule
