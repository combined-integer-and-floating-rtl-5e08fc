// mult4x4: dedicated 4x4-bit unsigned multiplier, p = x * y.
//
// The sixteen partial products xi&yj are summed by eight small parallel
// adders arranged in three levels, as in the paper's dedicated multiplier:
//   level 1  blocks 1-4: each pair of adjacent partial-product rows is added
//            two bits at a time (block 1 = FA+HA, block 2 = HA+HA,
//            block 3 = FA+HA, block 4 = HA+HA);
//   level 2  blocks 5 (HA, FA, FA) and 6 (FA) merge the partial sums;
//   level 3  blocks 7 (HA, HA) and 8 (FA, FA, HA) produce P3..P7.
// P0 = x0y0, P1 comes from block 1 and P2 from block 5.
// The adder types per block and the operand pairs of level 1 are those printed
// in the paper's figure; the exact bit that travels on each line between levels
// is not printed and was worked out here so that every column is summed once
// (see the column comments). The paper's per-level power switching is a power
// technique that has no logic function and is not modelled.
// Interface: x (multiplicand), y (multiplier), p (8-bit product).
// Timing: purely combinational, at most 3 adder levels plus ripple inside a level.
module mult4x4 (
  input  logic [3:0] x,
  input  logic [3:0] y,
  output logic [7:0] p
);
  // pp[i][j] = Xi & Yj, weight 2^(i+j)
  logic [3:0][3:0] pp;
  always_comb
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        pp[i][j] = x[i] & y[j];

  // level 1
  logic c1a, s2, c3;          // block 1
  logic s3, c2a, s4, c5;      // block 2
  logic t3, c3a, t4, tc5;     // block 3
  logic t5, c4a, t6, tc7;     // block 4
  // level 2
  logic k3, u3, k4, u4, k5;   // block 5
  logic u5, k6;               // block 6
  // level 3
  logic m4, m5, m6, m7, c8;   // blocks 7 and 8; c8 is always 0 (product < 256)

  // Block 1: rows Y0/Y1, columns 1-2
  half_adder b1_ha (.a(pp[1][0]), .b(pp[0][1]),            .s(p[1]), .c(c1a));
  full_adder b1_fa (.a(pp[2][0]), .b(pp[1][1]), .ci(c1a),  .s(s2),   .co(c3));
  // Block 2: rows Y0/Y1, columns 3-4
  half_adder b2_ha0 (.a(pp[3][0]), .b(pp[2][1]),           .s(s3),   .c(c2a));
  half_adder b2_ha1 (.a(pp[3][1]), .b(c2a),                .s(s4),   .c(c5));
  // Block 3: rows Y2/Y3, columns 3-4
  half_adder b3_ha (.a(pp[1][2]), .b(pp[0][3]),            .s(t3),   .c(c3a));
  full_adder b3_fa (.a(pp[2][2]), .b(pp[1][3]), .ci(c3a),  .s(t4),   .co(tc5));
  // Block 4: rows Y2/Y3, columns 5-6
  half_adder b4_ha0 (.a(pp[3][2]), .b(pp[2][3]),           .s(t5),   .c(c4a));
  half_adder b4_ha1 (.a(pp[3][3]), .b(c4a),                .s(t6),   .c(tc7));

  // Block 5: columns 2-4 (X0Y2 enters here)
  half_adder b5_ha  (.a(pp[0][2]), .b(s2),                 .s(p[2]), .c(k3));
  full_adder b5_fa0 (.a(s3), .b(c3), .ci(k3),              .s(u3),   .co(k4));
  full_adder b5_fa1 (.a(s4), .b(t4), .ci(k4),              .s(u4),   .co(k5));
  // Block 6: column 5
  full_adder b6_fa  (.a(c5), .b(tc5), .ci(t5),             .s(u5),   .co(k6));

  // Block 7: columns 3-4
  half_adder b7_ha0 (.a(u3), .b(t3),                       .s(p[3]), .c(m4));
  half_adder b7_ha1 (.a(u4), .b(m4),                       .s(p[4]), .c(m5));
  // Block 8: columns 5-7
  full_adder b8_fa0 (.a(k5), .b(u5), .ci(m5),              .s(p[5]), .co(m6));
  full_adder b8_fa1 (.a(k6), .b(t6), .ci(m6),              .s(p[6]), .co(m7));
  half_adder b8_ha  (.a(tc7), .b(m7),                      .s(p[7]), .c(c8));

  assign p[0] = pp[0][0];

endmodule
