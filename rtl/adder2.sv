// adder2: "Adder 2" of the 24x24 CIFM block; produces product bits P12..P35.
//
// Inputs, aligned to bit 12 of the product:
//   ll_hi  upper 12 bits of AL*BL          (bits 12..23)
//   lh     AL*BH, 24 bits                  (bits 12..35)
//   hl     AH*BL, 24 bits                  (bits 12..35)
//   hh_lo  lower 12 bits of AH*BH          (bits 24..35)
// Outputs: sum = P12..P35 and the two carry bits (weight 2^36, 2^37) that go to
// Adder 1, which matches the two lines between the adders in the paper's figure.
// The paper names the adder but gives no inside. REVERSIBLE = 0 uses one
// behavioural four-operand addition; REVERSIBLE = 1 builds it from TSG gates
// only: two carry-save rows and a 26-bit ripple-carry adder (own choice).
// Timing: purely combinational.
module adder2 #(
  parameter bit REVERSIBLE = 1'b0
) (
  input  logic [11:0] ll_hi,
  input  logic [23:0] lh,
  input  logic [23:0] hl,
  input  logic [11:0] hh_lo,
  output logic [23:0] sum,
  output logic [1:0]  carry
);
  localparam int unsigned W = 26;

  logic [W-1:0] op_ll, op_lh, op_hl, op_hh;
  assign op_ll = W'(ll_hi);
  assign op_lh = W'(lh);
  assign op_hl = W'(hl);
  assign op_hh = W'({hh_lo, 12'd0});

  generate
    if (REVERSIBLE) begin : g_rev
      logic [W-1:0] s1, c1, s2, c2, fs;
      logic         fco;
      rev_csa #(.W(W)) u_csa1 (.x(op_ll), .y(op_lh), .z(op_hl), .s(s1), .c(c1));
      rev_csa #(.W(W)) u_csa2 (.x(s1), .y({c1[W-2:0], 1'b0}), .z(op_hh), .s(s2), .c(c2));
      rev_ripple_adder #(.W(W)) u_cpa (.a(s2), .b({c2[W-2:0], 1'b0}), .cin(1'b0),
                                       .s(fs), .cout(fco));
      assign {carry, sum} = fs;
    end else begin : g_std
      assign {carry, sum} = op_ll + op_lh + op_hl + op_hh;
    end
  endgenerate
endmodule
