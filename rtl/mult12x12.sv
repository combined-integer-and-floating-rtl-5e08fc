// mult12x12: reconfigurable, self-repairable 12x12-bit unsigned multiply module.
//
// A and B are cut into nibbles A3 A2 A1 and B3 B2 B1 (A1/B1 least significant).
// Nine 4x4 cells compute every Ai x Bj in parallel; cell (i,j) has index
// k = 3*i + j (i, j = 0 for A1, B1) and weight 2^(4*(i+j)).
//   Reconfiguration: two checkers find whether A and B are 12, 8 or 4 bits
//   long; a cell is powered (cell_on) only when both its nibbles lie inside
//   those lengths and the module enable en (from the 24x24-level checker) is
//   set. A switched-off cell gets zero operands and its output is clamped to 0.
//   Self-repair: repair_unit holds a redundant 4x4 multiplier. When the repair
//   request (Aij, Bij, E) names cell k, that cell is switched off and its
//   product is replaced by the redundant one.
// The paper does not show how the 12x12 module adds the nine cell products
// (own choice): the standard build uses one behavioural sum, the reversible
// build (REVERSIBLE = 1) a TSG carry-save chain and ripple adder (rev_csa_sum);
// its cells are then rev_mult4x4 instead of mult4x4.
// Timing: purely combinational.
module mult12x12
  import cifm_pkg::*;
#(
  parameter bit REVERSIBLE = 1'b0
) (
  input  logic [HALF_W-1:0]   a,
  input  logic [HALF_W-1:0]   b,
  input  logic                en,       // module switched on (upper-level checker)
  input  repair_t             rep,      // repair request (Aij, Bij, E)
  output logic [2*HALF_W-1:0] p,
  output logic [N_CELL-1:0]   cell_on,  // power enable of each 4x4 cell
  output logic                red_on    // redundant multiplier powered
);
  logic [N_NIB-1:0]  act_a, act_b;
  logic [N_CELL-1:0] replace;
  logic [7:0]        red_p;
  logic [3:0]        cx [N_CELL];
  logic [3:0]        cy [N_CELL];
  logic [7:0]        raw_p  [N_CELL];
  logic [7:0]        cell_p [N_CELL];
  repair_t           rep_q;

  group_checker #(.NG(N_NIB), .GW(NIB_W)) u_chk_a (.x(a), .active(act_a));
  group_checker #(.NG(N_NIB), .GW(NIB_W)) u_chk_b (.x(b), .active(act_b));

  // no repair while the whole module is switched off
  always_comb begin
    rep_q    = rep;
    rep_q.en = rep.en & en;
  end

  repair_unit #(.REVERSIBLE(REVERSIBLE)) u_repair (
    .a(a), .b(b), .rep(rep_q), .red_p(red_p), .replace(replace), .red_on(red_on)
  );

  always_comb
    for (int i = 0; i < N_NIB; i++)
      for (int j = 0; j < N_NIB; j++) begin
        cell_on[3*i + j] = en & act_a[i] & act_b[j] & ~replace[3*i + j];
        cx[3*i + j]      = a[i*NIB_W +: NIB_W] & {NIB_W{cell_on[3*i + j]}};
        cy[3*i + j]      = b[j*NIB_W +: NIB_W] & {NIB_W{cell_on[3*i + j]}};
      end

  for (genvar k = 0; k < N_CELL; k++) begin : g_cell
    if (REVERSIBLE) begin : g_rev
      rev_mult4x4 u_cell (.x(cx[k]), .y(cy[k]), .p(raw_p[k]));
    end else begin : g_std
      mult4x4     u_cell (.x(cx[k]), .y(cy[k]), .p(raw_p[k]));
    end
  end

  logic [2*HALF_W-1:0] term [N_CELL];  // cell products at their weights

  always_comb
    for (int i = 0; i < N_NIB; i++)
      for (int j = 0; j < N_NIB; j++) begin
        if (replace[3*i + j])      cell_p[3*i + j] = red_p;
        else if (cell_on[3*i + j]) cell_p[3*i + j] = raw_p[3*i + j];
        else                       cell_p[3*i + j] = '0;
        term[3*i + j] = (2*HALF_W)'(cell_p[3*i + j]) << (NIB_W * (i + j));
      end

  generate
    if (REVERSIBLE) begin : g_rev_sum
      rev_csa_sum #(.N(N_CELL), .W(2*HALF_W)) u_sum (.ops(term), .sum(p));
    end else begin : g_std_sum
      always_comb begin
        p = '0;
        for (int k = 0; k < N_CELL; k++) p += term[k];
      end
    end
  endgenerate
endmodule
