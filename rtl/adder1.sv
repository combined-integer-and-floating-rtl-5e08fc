// adder1: "Adder 1" of the 24x24 CIFM block; produces product bits P36..P47.
//
// sum = hh_hi + cin, where hh_hi is the upper half of AH*BH and cin the two
// carry bits from Adder 2 (weight 2^36). The full product fits in 48 bits, so
// no carry leaves this adder. The paper names the adder but gives no inside.
// REVERSIBLE = 0 uses a behavioural addition; REVERSIBLE = 1 a 12-bit TSG
// ripple-carry adder (own choice).
// Timing: purely combinational.
module adder1 #(
  parameter bit REVERSIBLE = 1'b0
) (
  input  logic [11:0] hh_hi,
  input  logic [1:0]  cin,
  output logic [11:0] sum
);
  logic cout;  // always 0 for a fault-free block: a 24x24 product fits in 48 bits

  generate
    if (REVERSIBLE) begin : g_rev
      rev_ripple_adder #(.W(12)) u_cpa (.a(hh_hi), .b({10'd0, cin}), .cin(1'b0),
                                        .s(sum), .cout(cout));
    end else begin : g_std
      assign {cout, sum} = {1'b0, hh_hi} + 13'(cin);
    end
  endgenerate
endmodule
