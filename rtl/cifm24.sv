// cifm24: the reconfigurable, self-repairable 24x24-bit unsigned multiply block
// of the CIFM, p = a * b.
//
// A = {AH, AL} and B = {BH, BL}, each half 12 bits. Four 12x12 modules work in
// parallel: AL*BL (weight 2^0), AL*BH and AH*BL (2^12), AH*BH (2^24).
// P0..P11 are the low bits of AL*BL; Adder 2 sums the middle terms into
// P12..P35 plus two carries; Adder 1 adds those carries to the upper half of
// AH*BH to give P36..P47. This is the arrangement of the paper's 24x24 figure.
// Reconfiguration: a checker on A switches off the two AH modules when AH is
// zero, a checker on B the two BH modules when BH is zero; inside each module
// further checkers switch off single 4x4 cells.
// Self-repair: each 12x12 module has its own redundant 4x4 multiplier, steered
// by rep[m] (module index m as in cifm_pkg: LL, LH, HL, HH), i.e. four spare
// multipliers per 24x24 block as the paper proposes.
// REVERSIBLE = 1 gives the reversible CIFM: reversible 4x4 cells and TSG adders.
// Status outputs: cell_on[9*m + k] is the power enable of cell k of module m,
// red_on[m] that of the redundant multiplier of module m.
// Timing: purely combinational.
module cifm24
  import cifm_pkg::*;
#(
  parameter bit REVERSIBLE = 1'b0
) (
  input  logic [MANT_W-1:0]       a,
  input  logic [MANT_W-1:0]       b,
  input  repair_t                 rep [N_SUB],
  output logic [2*MANT_W-1:0]     p,
  output logic [N_SUB*N_CELL-1:0] cell_on,
  output logic [N_SUB-1:0]        red_on
);
  logic [1:0]          act_a, act_b;
  logic [HALF_W-1:0]   op_a [N_SUB];
  logic [HALF_W-1:0]   op_b [N_SUB];
  logic [N_SUB-1:0]    sub_en;
  logic [2*HALF_W-1:0] pr [N_SUB];
  logic [1:0]          c2;

  group_checker #(.NG(2), .GW(HALF_W)) u_chk_a (.x(a), .active(act_a));
  group_checker #(.NG(2), .GW(HALF_W)) u_chk_b (.x(b), .active(act_b));

  always_comb begin
    op_a[SUB_LL] = a[HALF_W-1:0];      op_b[SUB_LL] = b[HALF_W-1:0];
    op_a[SUB_LH] = a[HALF_W-1:0];      op_b[SUB_LH] = b[MANT_W-1:HALF_W];
    op_a[SUB_HL] = a[MANT_W-1:HALF_W]; op_b[SUB_HL] = b[HALF_W-1:0];
    op_a[SUB_HH] = a[MANT_W-1:HALF_W]; op_b[SUB_HH] = b[MANT_W-1:HALF_W];
    sub_en[SUB_LL] = act_a[0] & act_b[0];
    sub_en[SUB_LH] = act_a[0] & act_b[1];
    sub_en[SUB_HL] = act_a[1] & act_b[0];
    sub_en[SUB_HH] = act_a[1] & act_b[1];
  end

  for (genvar m = 0; m < N_SUB; m++) begin : g_sub
    mult12x12 #(.REVERSIBLE(REVERSIBLE)) u_mul (
      .a(op_a[m]), .b(op_b[m]), .en(sub_en[m]), .rep(rep[m]),
      .p(pr[m]), .cell_on(cell_on[m*N_CELL +: N_CELL]), .red_on(red_on[m])
    );
  end

  adder2 #(.REVERSIBLE(REVERSIBLE)) u_adder2 (
    .ll_hi(pr[SUB_LL][2*HALF_W-1:HALF_W]), .lh(pr[SUB_LH]), .hl(pr[SUB_HL]),
    .hh_lo(pr[SUB_HH][HALF_W-1:0]), .sum(p[3*HALF_W-1:HALF_W]), .carry(c2)
  );

  adder1 #(.REVERSIBLE(REVERSIBLE)) u_adder1 (
    .hh_hi(pr[SUB_HH][2*HALF_W-1:HALF_W]), .cin(c2), .sum(p[4*HALF_W-1:3*HALF_W])
  );

  assign p[HALF_W-1:0] = pr[SUB_LL][HALF_W-1:0];
endmodule
