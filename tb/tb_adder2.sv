// tb_adder2: tests Adder 2 of the 24x24 block in its standard and reversible
// (TSG) builds. Operands are random products of 12-bit numbers and random
// bit patterns, plus the all-ones corner; the result {carry, sum} must equal
// ll_hi + lh + hl + hh_lo*2^12. Counts how often each carry value (0..2)
// occurred and fails if a carry into Adder 1 never happened.
module tb_adder2;
  logic [11:0] ll_hi, hh_lo;
  logic [23:0] lh, hl, sum, sum_r;
  logic [1:0]  carry, carry_r;
  logic [25:0] expect_v;
  int checks = 0, failures = 0;
  int n_carry [4];

  adder2 #(.REVERSIBLE(1'b0)) dut   (.ll_hi(ll_hi), .lh(lh), .hl(hl), .hh_lo(hh_lo), .sum(sum),   .carry(carry));
  adder2 #(.REVERSIBLE(1'b1)) dut_r (.ll_hi(ll_hi), .lh(lh), .hl(hl), .hh_lo(hh_lo), .sum(sum_r), .carry(carry_r));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_carry = '{0, 0, 0, 0};
    for (int n = 0; n < 5000; n++) begin
      if (n == 0) begin
        ll_hi = '1; lh = 24'hFFE001; hl = 24'hFFE001; hh_lo = '1;  // 4095*4095 products
      end else if (n % 2) begin
        ll_hi = 12'($urandom); hh_lo = 12'($urandom);
        lh = 24'(12'($urandom)) * 24'(12'($urandom));
        hl = 24'(12'($urandom)) * 24'(12'($urandom));
      end else begin
        ll_hi = 12'($urandom); hh_lo = 12'($urandom);
        lh = 24'($urandom); hl = 24'($urandom);
      end
      #1;
      expect_v = 26'(ll_hi) + 26'(lh) + 26'(hl) + (26'(hh_lo) << 12);
      n_carry[expect_v[25:24]]++;
      checks += 2;
      if ({carry, sum} != expect_v) begin
        failures++;
        $display("FAIL std: %h %h %h %h -> %h, expected %h", ll_hi, lh, hl, hh_lo, {carry, sum}, expect_v);
      end
      if ({carry_r, sum_r} != expect_v) begin
        failures++;
        $display("FAIL rev: %h %h %h %h -> %h, expected %h", ll_hi, lh, hl, hh_lo, {carry_r, sum_r}, expect_v);
      end
    end
    $display("carry 0/1/2 seen: %0d %0d %0d", n_carry[0], n_carry[1], n_carry[2]);
    checks++;
    if (n_carry[1] == 0 || n_carry[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
