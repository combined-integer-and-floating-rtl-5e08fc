// tb_fp_ref_pkg: reference model of the single-precision multiply used by the
// testbenches. It works on the exact integer product of the significands and
// rounds by comparing the discarded remainder with one half ulp (ties to
// even), a different formulation from the guard/sticky logic of the RTL.
// Conventions shared with the RTL: zero/subnormal inputs count as zero,
// results that would be subnormal become signed zero, overflow gives
// infinity, NaN results are 0x7FC00000.
package tb_fp_ref_pkg;

  typedef struct {
    bit norm_shift;   // significand product >= 2
    bit round_up;     // rounding incremented the significand
    bit round_carry;  // and that overflowed to 2.0 (renormalised)
    bit overflow;     // result became infinity from finite operands
    bit underflow;    // result flushed to zero from non-zero operands
    bit special;      // an operand was zero, infinity or NaN
  } fp_events_t;

  function automatic logic [31:0] fmul_ref(input logic [31:0] a, input logic [31:0] b,
                                           output fp_events_t ev);
    logic        s;
    int          ea, eb, e, sh;
    bit          za, zb, ia, ib, na, nb;
    longint unsigned m, q, rem, half;
    ev = '{default: 0};
    s  = a[31] ^ b[31];
    ea = int'(a[30:23]);
    eb = int'(b[30:23]);
    za = (ea == 0);
    zb = (eb == 0);
    ia = (ea == 255) && (a[22:0] == 0);
    ib = (eb == 255) && (b[22:0] == 0);
    na = (ea == 255) && (a[22:0] != 0);
    nb = (eb == 255) && (b[22:0] != 0);
    if (za || zb || ia || ib || na || nb) begin
      ev.special = 1;
      if (na || nb || (ia && zb) || (ib && za)) return 32'h7FC0_0000;
      if (ia || ib) return {s, 8'hFF, 23'd0};
      return {s, 31'd0};
    end
    m  = longint'({1'b1, a[22:0]}) * longint'({1'b1, b[22:0]});
    e  = ea + eb - 127;
    sh = 23;
    while ((m >> sh) >= (64'd1 << 24)) begin
      sh++;
      e++;
      ev.norm_shift = 1;
    end
    q    = m >> sh;
    rem  = m & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && q[0])) begin
      q++;
      ev.round_up = 1;
    end
    if (q == (64'd1 << 24)) begin
      q >>= 1;
      e++;
      ev.round_carry = 1;
    end
    if (e >= 255) begin
      ev.overflow = 1;
      return {s, 8'hFF, 23'd0};
    end
    if (e <= 0) begin
      ev.underflow = 1;
      return {s, 31'd0};
    end
    return {s, 8'(e), q[22:0]};
  endfunction

  // random operand: mostly normal numbers with exponents spread so that
  // overflow and underflow occur, sometimes special values
  function automatic logic [31:0] rand_fp();
    int unsigned k = $urandom_range(0, 99);
    logic [31:0] v = $urandom;
    if (k < 3)  return {v[31], 31'd0};                    // zero
    if (k < 5)  return {v[31], 8'd0, v[22:0]};            // subnormal
    if (k < 7)  return {v[31], 8'hFF, 23'd0};             // infinity
    if (k < 8)  return {v[31], 8'hFF, v[22:0] | 23'd1};   // NaN
    if (k < 20) return {v[31], 8'($urandom_range(190, 254)), v[22:0]};
    if (k < 32) return {v[31], 8'($urandom_range(1, 64)), v[22:0]};
    if (k < 40) return {v[31], v[30:23] | 8'd1, 23'h7FFFFF ^ 23'($urandom_range(0, 3))};
    return {v[31], 8'($urandom_range(1, 254)), v[22:0]};
  endfunction

endpackage
