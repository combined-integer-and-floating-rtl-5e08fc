// tb_group_checker: exhaustive test of the 3 x 4-bit checker (all 4096
// operands). Expected: group i is active when the operand shifted right by 4*i
// is non-zero; group 0 is always active. Also counts how often the operand was
// 12, 8 and 4 bits long and fails if one length never occurred.
module tb_group_checker;
  logic [11:0] x;
  logic [2:0]  active, expect_act;
  int checks = 0, failures = 0;
  int n_len [3];

  group_checker #(.NG(3), .GW(4)) dut (.x(x), .active(active));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_len = '{0, 0, 0};
    for (int v = 0; v < 4096; v++) begin
      x = 12'(v);
      #1;
      for (int i = 0; i < 3; i++)
        expect_act[i] = (i == 0) || ((v >> (4 * i)) != 0);
      n_len[$countones(expect_act) - 1]++;
      checks++;
      if (active != expect_act) begin
        failures++;
        $display("FAIL x=%h active=%b expected %b", x, active, expect_act);
      end
    end
    for (int l = 0; l < 3; l++) begin
      checks++;
      if (n_len[l] == 0) failures++;
    end
    $display("lengths 4/8/12 bits seen: %0d %0d %0d", n_len[0], n_len[1], n_len[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
