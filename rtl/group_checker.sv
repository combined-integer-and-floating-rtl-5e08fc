// group_checker: the "checker" of the reconfigurable multiplier.
//
// The operand is seen as NG groups of GW bits (group 0 least significant).
// The checker finds how many groups the operand really uses, i.e. its length
// rounded up to a whole group, and raises active[i] for every group that lies
// inside that length: active[i] = OR of all bits from group i upwards. Group 0
// is always active. A multiply cell whose operand group is not active is
// switched off by its owner; since that group is all zero its product is zero
// and the result is unchanged.
// Paper: checkers on the upper groups tell whether a 12-bit operand is 12, 8
// or 4 bits long (NG=3, GW=4), and whether a 24-bit operand needs its upper 12
// bits (NG=2, GW=12). The leading-length rule is this design's reading of that.
// Timing: purely combinational (one OR tree per group).
module group_checker #(
  parameter int unsigned NG = 3,  // number of groups
  parameter int unsigned GW = 4   // bits per group
) (
  input  logic [NG*GW-1:0] x,
  output logic [NG-1:0]    active
);
  logic [NG-1:0] nz;  // group i is non-zero

  always_comb begin
    for (int i = 0; i < NG; i++)
      nz[i] = |x[i*GW +: GW];
    active[NG-1] = nz[NG-1];
    for (int i = NG - 2; i >= 1; i--)
      active[i] = active[i+1] | nz[i];
    active[0] = 1'b1;
  end
endmodule
