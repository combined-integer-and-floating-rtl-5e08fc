// tb_tsg_gate: exhaustive test of the TSG reversible gate.
// Checks that the 16 input vectors map to 16 distinct outputs (reversibility),
// that with C = 0 the gate is a full adder (R = sum, S = carry, Q = A^B,
// P = A), and the outputs for C = 1 worked out by hand: Q = B', R = B'^D,
// S = B'D ^ (AB)'.
module tb_tsg_gate;
  logic a, b, c, d, p, q, r, s;
  logic [15:0] seen;
  int checks = 0, failures = 0;

  tsg_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: abcd=%b%b%b%b pqrs=%b%b%b%b", what, a, b, c, d, p, q, r, s);
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
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check(!seen[{p, q, r, s}], "output vector repeated");
      seen[{p, q, r, s}] = 1'b1;
      check(p == a, "P = A");
      if (!c) begin
        check({s, r} == 2'(a + b + d), "full adder");
        check(q == (a ^ b), "Q = A^B");
      end else begin
        check(q == !b, "Q = B'");
        check(r == (!b ^ d), "R = B'^D");
        check(s == ((!b & d) ^ !(a & b)), "S");
      end
    end
    check(seen == 16'hFFFF, "bijection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
