// fp_mul: IEEE-754 single-precision multiply around an external 24x24
// significand multiplier (the CIFM block).
//
// Data flow, following the paper's floating-point multiplier:
//   sign      XOR of the two sign bits;
//   exponent  first 8-bit adder adds the two biased exponents; a mux, set by
//             the normalize control, feeds the second adder with -127 (no
//             normalize shift) or -126 (product in [2,4), shifted right once);
//   mantissa  ma = {1, fraction A} and mb = {1, fraction B} leave on ma/mb,
//             their 48-bit product comes back on mp;
//   normalize the shifter keeps the 24 bits below the leading one;
//   round     round to nearest, ties to even, on the guard bit and the sticky
//             OR of the rest; a carry out of the rounder (1.111..1 + 1) goes
//             back to the control, which renormalises (exponent + 1).
// The paper gives these units and the sign/exponent/significand rules but not
// the rounding mode nor the special values; those are this design's choices:
//   * zero and subnormal inputs are treated as zero (flush to zero),
//   * infinities and NaNs follow IEEE-754 (NaN result is 0x7FC00000),
//   * exponent overflow gives infinity, underflow gives signed zero.
// For zero, infinite or NaN operands ma/mb are driven to zero so that the
// multiplier's checkers switch it off.
// Bit layout: a[31] sign, a[30:23] exponent, a[22:0] fraction (the paper's
// figure numbers the same fields 0, 1-8 and 9-31 from the sign end).
// Timing: purely combinational; mp must be ma * mb in the same cycle.
module fp_mul
  import cifm_pkg::*;
(
  input  logic [31:0]         a,
  input  logic [31:0]         b,
  output logic [MANT_W-1:0]   ma,  // significand of a with hidden bit
  output logic [MANT_W-1:0]   mb,  // significand of b with hidden bit
  input  logic [2*MANT_W-1:0] mp,  // ma * mb from the 24x24 multiplier
  output logic [31:0]         y
);
  logic       sa, sb, sy;
  logic [7:0] ea, eb;
  logic       a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  logic [8:0]        esum;      // first 8-bit adder
  logic              norm;      // product >= 2: shift right by one
  logic signed [9:0] bias_sel;  // mux in front of the second adder
  logic signed [9:0] e1, e2;
  logic [23:0]       m24;       // normalised significand before rounding
  logic              guard, sticky, rnd;
  logic [24:0]       m25;       // after rounding

  always_comb begin
    sa = a[31];  ea = a[30:23];
    sb = b[31];  eb = b[30:23];
    sy = sa ^ sb;

    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);

    ma = (a_zero || ea == 8'hFF) ? '0 : {1'b1, a[22:0]};
    mb = (b_zero || eb == 8'hFF) ? '0 : {1'b1, b[22:0]};

    // exponent path
    esum     = {1'b0, ea} + {1'b0, eb};
    norm     = mp[47];
    bias_sel = norm ? -10'sd126 : -10'sd127;
    e1       = $signed({1'b0, esum}) + bias_sel;

    // normalize shifter and rounder
    if (norm) begin
      m24    = mp[47:24];
      guard  = mp[23];
      sticky = |mp[22:0];
    end else begin
      m24    = mp[46:23];
      guard  = mp[22];
      sticky = |mp[21:0];
    end
    rnd = guard & (sticky | m24[0]);
    m25 = {1'b0, m24} + 25'(rnd);
    e2  = m25[24] ? e1 + 10'sd1 : e1;

    // result selection
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (e2 >= 10'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (e2 <= 10'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e2[7:0], m25[24] ? m25[23:1] : m25[22:0]};
  end
endmodule
