// cifm_top: combined integer and floating-point multiplier (CIFM).
//
// One reconfigurable, self-repairable 24x24 multiply block (cifm24) serves two
// modes selected by mode:
//   MODE_INT  prod = a[23:0] * b[23:0], unsigned 48-bit product;
//   MODE_FP   prod[31:0] = a * b in IEEE-754 single precision (see fp_mul),
//             prod[47:32] = 0. The significands {1, fraction} of a and b go
//             through the same 24x24 block.
// rep[m] is the repair request of 12x12 module m (LL, LH, HL, HH); cell_on
// and red_on show which 4x4 multipliers are powered after the checkers and the
// repair logic have acted. REVERSIBLE = 1 builds the reversible CIFM (TSG/NG
// based 4x4 cells and adders); the floating-point wrapper is the same.
// The mode multiplexer and the shared output bus are this design's choices:
// the paper only states that one 24x24 block performs both operations.
// Timing: purely combinational, no clock.
module cifm_top
  import cifm_pkg::*;
#(
  parameter bit REVERSIBLE = 1'b0
) (
  input  mode_e                   mode,
  input  logic [31:0]             a,
  input  logic [31:0]             b,
  input  repair_t                 rep [N_SUB],
  output logic [2*MANT_W-1:0]     prod,
  output logic [N_SUB*N_CELL-1:0] cell_on,
  output logic [N_SUB-1:0]        red_on
);
  logic [MANT_W-1:0]   fp_ma, fp_mb, mul_a, mul_b;
  logic [2*MANT_W-1:0] mul_p;
  logic [31:0]         fp_y;

  fp_mul u_fp (.a(a), .b(b), .ma(fp_ma), .mb(fp_mb), .mp(mul_p), .y(fp_y));

  always_comb begin
    mul_a = (mode == MODE_FP) ? fp_ma : a[MANT_W-1:0];
    mul_b = (mode == MODE_FP) ? fp_mb : b[MANT_W-1:0];
  end

  cifm24 #(.REVERSIBLE(REVERSIBLE)) u_mul (
    .a(mul_a), .b(mul_b), .rep(rep), .p(mul_p), .cell_on(cell_on), .red_on(red_on)
  );

  assign prod = (mode == MODE_FP) ? {16'd0, fp_y} : mul_p;
endmodule
