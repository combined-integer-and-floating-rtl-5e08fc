// tb_fp_mul: tests the floating-point wrapper on its own, with the 24x24
// significand product supplied by the testbench (mp = ma * mb). Results are
// compared with tb_fp_ref_pkg::fmul_ref on random and directed operands; the
// normalisation shift, rounding, rounding carry, overflow, underflow and the
// special values must each occur at least once.
module tb_fp_mul;
  import tb_fp_ref_pkg::*;
  logic [31:0] a, b, y, y_ref;
  logic [23:0] ma, mb;
  logic [47:0] mp;
  fp_events_t  ev;
  int checks = 0, failures = 0;
  int n_norm = 0, n_rnd = 0, n_carry = 0, n_ovf = 0, n_unf = 0, n_spec = 0;

  fp_mul dut (.a(a), .b(b), .ma(ma), .mb(mb), .mp(mp), .y(y));
  assign mp = 48'(ma) * 48'(mb);

  task automatic run(input logic [31:0] x, input logic [31:0] z);
    a = x;
    b = z;
    #1;
    y_ref = fmul_ref(a, b, ev);
    n_norm  += int'(ev.norm_shift);
    n_rnd   += int'(ev.round_up);
    n_carry += int'(ev.round_carry);
    n_ovf   += int'(ev.overflow);
    n_unf   += int'(ev.underflow);
    n_spec  += int'(ev.special);
    checks++;
    if (y != y_ref) begin
      failures++;
      $display("FAIL %h * %h = %h, expected %h", a, b, y, y_ref);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(32'h3F80_0000, 32'h3F80_0000);  // 1 * 1
    run(32'h4000_0000, 32'hC040_0000);  // 2 * -3
    run(32'h3F80_0001, 32'h3FFF_FFFE);  // rounds up to 2.0 (rounding carry)
    run(32'h7F00_0000, 32'h4000_0000);  // overflow
    run(32'h0080_0000, 32'h3F00_0000);  // underflow
    run(32'h7F80_0000, 32'h0000_0000);  // inf * 0 = NaN
    for (int n = 0; n < 20000; n++) run(rand_fp(), rand_fp());
    $display("norm shift %0d, round up %0d, round carry %0d, overflow %0d, underflow %0d, special %0d",
             n_norm, n_rnd, n_carry, n_ovf, n_unf, n_spec);
    checks += 6;
    if (n_norm == 0)  failures++;
    if (n_rnd == 0)   failures++;
    if (n_carry == 0) failures++;
    if (n_ovf == 0)   failures++;
    if (n_unf == 0)   failures++;
    if (n_spec == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
