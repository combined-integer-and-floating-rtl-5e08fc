// tb_repair_unit: tests the repair resource of one 12x12 module.
// For random operands and every repair request (E, Aij, Bij) it checks the
// one-hot replace vector, the redundant multiplier's power enable and its
// product, which must equal the selected nibble of A times that of B (zero
// when no repair is active).
module tb_repair_unit;
  import cifm_pkg::*;
  logic [11:0] a, b;
  repair_t     rep;
  logic [7:0]  red_p;
  logic [8:0]  replace, exp_replace;
  logic        red_on;
  int checks = 0, failures = 0;

  repair_unit dut (.a(a), .b(b), .rep(rep), .red_p(red_p), .replace(replace), .red_on(red_on));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%h b=%h rep=%b red_p=%h replace=%b red_on=%b",
               what, a, b, rep, red_p, replace, red_on);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      a = 12'($urandom);
      b = 12'($urandom);
      for (int r = 0; r < 32; r++) begin
        rep = repair_t'(5'(r));
        #1;
        if (rep.en && rep.a_sel != 2'd3 && rep.b_sel != 2'd3) begin
          exp_replace = 9'(1) << (3 * rep.a_sel + rep.b_sel);
          check(red_on, "red_on");
          check(replace == exp_replace, "replace");
          check(red_p == 8'(((a >> (4 * rep.a_sel)) & 15) * ((b >> (4 * rep.b_sel)) & 15)),
                "redundant product");
        end else begin
          check(!red_on, "red_on off");
          check(replace == '0, "no replace");
          check(red_p == '0, "isolated");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
