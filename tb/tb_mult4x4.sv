// tb_mult4x4: exhaustive self-checking test of the dedicated 4x4 multiplier.
// All 256 operand pairs are applied and the product is compared with x*y.
module tb_mult4x4;
  logic [3:0] x, y;
  logic [7:0] p;
  int checks = 0, failures = 0;

  mult4x4 dut (.x(x), .y(y), .p(p));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        x = 4'(i); y = 4'(j);
        #1;
        checks++;
        if (p != 8'(i * j)) begin
          failures++;
          $display("FAIL %0d * %0d = %0d, got %0d", i, j, i * j, p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
