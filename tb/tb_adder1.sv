// tb_adder1: tests Adder 1 (standard and reversible builds) on all carry
// values and random upper halves whose sum stays within 12 bits, against
// hh_hi + cin.
module tb_adder1;
  logic [11:0] hh_hi, sum, sum_r;
  logic [1:0]  cin;
  int checks = 0, failures = 0;

  adder1 #(.REVERSIBLE(1'b0)) dut   (.hh_hi(hh_hi), .cin(cin), .sum(sum));
  adder1 #(.REVERSIBLE(1'b1)) dut_r (.hh_hi(hh_hi), .cin(cin), .sum(sum_r));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      cin   = 2'(n % 3);
      hh_hi = (n < 4) ? 12'hFFC + 12'(n) - 12'(cin) : 12'($urandom_range(0, 4093));
      #1;
      checks += 2;
      if (sum != hh_hi + 12'(cin)) begin
        failures++;
        $display("FAIL std: %h + %0d -> %h", hh_hi, cin, sum);
      end
      if (sum_r != hh_hi + 12'(cin)) begin
        failures++;
        $display("FAIL rev: %h + %0d -> %h", hh_hi, cin, sum_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
