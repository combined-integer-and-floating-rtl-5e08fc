// tb_ng_gate: exhaustive test of the New Gate (NG).
// Checks reversibility (8 distinct outputs), the half-adder use with C = 0
// (Q = AB carry, R = A^B sum, P = A), and for C = 1: Q = (AB)', R = B'.
module tb_ng_gate;
  logic a, b, c, p, q, r;
  logic [7:0] seen;
  int checks = 0, failures = 0;

  ng_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: abc=%b%b%b pqr=%b%b%b", what, a, b, c, p, q, r);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seen = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check(!seen[{p, q, r}], "output vector repeated");
      seen[{p, q, r}] = 1'b1;
      check(p == a, "P = A");
      if (!c) begin
        check({q, r} == 2'(a + b), "half adder");
      end else begin
        check(q == !(a & b), "Q = (AB)'");
        check(r == !b, "R = B'");
      end
    end
    check(seen == 8'hFF, "bijection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
