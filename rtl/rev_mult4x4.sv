// rev_mult4x4: reversible-logic version of the dedicated 4x4-bit multiplier,
// p = x * y.
//
// Same three-level structure of eight parallel-adder blocks as mult4x4, with
// every full adder realised by one TSG gate (C = 0, D = carry-in; R = sum,
// S = carry) and every half adder by one New Gate (C = 0; Q = carry, R = sum).
// This follows the paper's reversible 4x4 multiplier, which shows the same
// blocks with TSG and NG cells. The garbage outputs (P, Q of each TSG and P of
// each NG) are kept as named internal nets and left unused. The partial
// products xi&yj are taken as given inputs in the paper; here they are formed
// with AND gates (their reversible generation and fan-out are not shown there).
// Interface: x (multiplicand), y (multiplier), p (8-bit product).
// Timing: purely combinational.
module rev_mult4x4 (
  input  logic [3:0] x,
  input  logic [3:0] y,
  output logic [7:0] p
);
  logic [3:0][3:0] pp;
  always_comb
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        pp[i][j] = x[i] & y[j];

  logic c1a, s2, c3, s3, c2a, s4, c5, t3, c3a, t4, tc5, t5, c4a, t6, tc7;
  logic k3, u3, k4, u4, k5, u5, k6, m4, m5, m6, m7;
  logic c8;  // carry out of column 7, always 0 (product < 256)
  // garbage outputs: 10 NG gates (1 each) and 7 TSG gates (2 each)
  logic [9:0] g_ng;
  logic [6:0] g_tp, g_tq;

  // level 1
  ng_gate  b1_ng  (.a(pp[1][0]), .b(pp[0][1]), .c(1'b0),            .p(g_ng[0]), .q(c1a), .r(p[1]));
  tsg_gate b1_tsg (.a(pp[2][0]), .b(pp[1][1]), .c(1'b0), .d(c1a),   .p(g_tp[0]), .q(g_tq[0]), .r(s2), .s(c3));
  ng_gate  b2_ng0 (.a(pp[3][0]), .b(pp[2][1]), .c(1'b0),            .p(g_ng[1]), .q(c2a), .r(s3));
  ng_gate  b2_ng1 (.a(pp[3][1]), .b(c2a),      .c(1'b0),            .p(g_ng[2]), .q(c5),  .r(s4));
  ng_gate  b3_ng  (.a(pp[1][2]), .b(pp[0][3]), .c(1'b0),            .p(g_ng[3]), .q(c3a), .r(t3));
  tsg_gate b3_tsg (.a(pp[2][2]), .b(pp[1][3]), .c(1'b0), .d(c3a),   .p(g_tp[1]), .q(g_tq[1]), .r(t4), .s(tc5));
  ng_gate  b4_ng0 (.a(pp[3][2]), .b(pp[2][3]), .c(1'b0),            .p(g_ng[4]), .q(c4a), .r(t5));
  ng_gate  b4_ng1 (.a(pp[3][3]), .b(c4a),      .c(1'b0),            .p(g_ng[5]), .q(tc7), .r(t6));
  // level 2
  ng_gate  b5_ng   (.a(pp[0][2]), .b(s2), .c(1'b0),                 .p(g_ng[6]), .q(k3), .r(p[2]));
  tsg_gate b5_tsg0 (.a(s3), .b(c3), .c(1'b0), .d(k3),               .p(g_tp[2]), .q(g_tq[2]), .r(u3), .s(k4));
  tsg_gate b5_tsg1 (.a(s4), .b(t4), .c(1'b0), .d(k4),               .p(g_tp[3]), .q(g_tq[3]), .r(u4), .s(k5));
  tsg_gate b6_tsg  (.a(c5), .b(tc5), .c(1'b0), .d(t5),              .p(g_tp[4]), .q(g_tq[4]), .r(u5), .s(k6));
  // level 3
  ng_gate  b7_ng0  (.a(u3), .b(t3), .c(1'b0),                       .p(g_ng[7]), .q(m4), .r(p[3]));
  ng_gate  b7_ng1  (.a(u4), .b(m4), .c(1'b0),                       .p(g_ng[8]), .q(m5), .r(p[4]));
  tsg_gate b8_tsg0 (.a(k5), .b(u5), .c(1'b0), .d(m5),               .p(g_tp[5]), .q(g_tq[5]), .r(p[5]), .s(m6));
  tsg_gate b8_tsg1 (.a(k6), .b(t6), .c(1'b0), .d(m6),               .p(g_tp[6]), .q(g_tq[6]), .r(p[6]), .s(m7));
  ng_gate  b8_ng   (.a(tc7), .b(m7), .c(1'b0),                      .p(g_ng[9]), .q(c8), .r(p[7]));

  assign p[0]     = pp[0][0];

endmodule
