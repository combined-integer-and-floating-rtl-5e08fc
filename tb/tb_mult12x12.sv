// tb_mult12x12: tests the reconfigurable, self-repairable 12x12 module, in the
// standard and the reversible build.
//   * products of random operands whose length (4, 8 or 12 bits) is drawn at
//     random, against a*b;
//   * the power enables: cell (i,j) must be on exactly when A >> 4i and
//     B >> 4j are non-zero (or i/j = 0) and the module is enabled;
//   * module disable: with en = 0 every cell is off;
//   * self-repair: a fault is injected into one cell by forcing its output;
//     without repair the product must be wrong, with the repair request
//     naming that cell it must be right again; this is done for cell A2xB3
//     and then for a stuck-at-0 output of each of the nine cells in turn.
// Each mechanism is counted and must have occurred at least once.
module tb_mult12x12;
  import cifm_pkg::*;
  logic [11:0] a, b;
  logic        en;
  repair_t     rep;
  logic [23:0] p, p_r;
  logic [8:0]  cell_on, cell_on_r, exp_on;
  logic        red_on, red_on_r;
  int checks = 0, failures = 0;
  int n_len_a [3], n_fault_seen = 0, n_repaired = 0, n_off = 0;

  mult12x12 #(.REVERSIBLE(1'b0)) dut (
    .a(a), .b(b), .en(en), .rep(rep), .p(p), .cell_on(cell_on), .red_on(red_on));
  mult12x12 #(.REVERSIBLE(1'b1)) dut_r (
    .a(a), .b(b), .en(en), .rep(rep), .p(p_r), .cell_on(cell_on_r), .red_on(red_on_r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%h b=%h en=%b rep=%b p=%h p_r=%h cell_on=%b",
               what, a, b, en, rep, p, p_r, cell_on);
    end
  endtask

  function automatic logic [11:0] rand_len();
    int len = 4 * (1 + int'($urandom_range(0, 2)));
    return 12'($urandom) & 12'((1 << len) - 1);
  endfunction

  function automatic logic [8:0] expected_on(input logic [11:0] x, y, input logic e,
                                             input repair_t r);
    logic [8:0] on;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        on[3*i + j] = e && (i == 0 || (x >> (4 * i)) != 0) && (j == 0 || (y >> (4 * j)) != 0)
                      && !(e && r.en && r.a_sel == 2'(i) && r.b_sel == 2'(j));
    return on;
  endfunction

  // stuck-at-0 fault on the output of cell k (both builds); on = 0 releases it
  task automatic inject(input int k, input bit on);
    if (on)
      case (k)
        0: begin force dut.raw_p[0] = 8'h00; force dut_r.raw_p[0] = 8'h00; end
        1: begin force dut.raw_p[1] = 8'h00; force dut_r.raw_p[1] = 8'h00; end
        2: begin force dut.raw_p[2] = 8'h00; force dut_r.raw_p[2] = 8'h00; end
        3: begin force dut.raw_p[3] = 8'h00; force dut_r.raw_p[3] = 8'h00; end
        4: begin force dut.raw_p[4] = 8'h00; force dut_r.raw_p[4] = 8'h00; end
        5: begin force dut.raw_p[5] = 8'h00; force dut_r.raw_p[5] = 8'h00; end
        6: begin force dut.raw_p[6] = 8'h00; force dut_r.raw_p[6] = 8'h00; end
        7: begin force dut.raw_p[7] = 8'h00; force dut_r.raw_p[7] = 8'h00; end
        default: begin force dut.raw_p[8] = 8'h00; force dut_r.raw_p[8] = 8'h00; end
      endcase
    else
      case (k)
        0: begin release dut.raw_p[0]; release dut_r.raw_p[0]; end
        1: begin release dut.raw_p[1]; release dut_r.raw_p[1]; end
        2: begin release dut.raw_p[2]; release dut_r.raw_p[2]; end
        3: begin release dut.raw_p[3]; release dut_r.raw_p[3]; end
        4: begin release dut.raw_p[4]; release dut_r.raw_p[4]; end
        5: begin release dut.raw_p[5]; release dut_r.raw_p[5]; end
        6: begin release dut.raw_p[6]; release dut_r.raw_p[6]; end
        7: begin release dut.raw_p[7]; release dut_r.raw_p[7]; end
        default: begin release dut.raw_p[8]; release dut_r.raw_p[8]; end
      endcase
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_len_a = '{0, 0, 0};
    en  = 1'b1;
    rep = '0;
    // reconfiguration
    for (int n = 0; n < 3000; n++) begin
      a = rand_len();
      b = rand_len();
      #1;
      n_len_a[(a >> 8) != 0 ? 2 : (a >> 4) != 0 ? 1 : 0]++;
      check(p == 24'(a) * 24'(b), "product");
      check(p_r == 24'(a) * 24'(b), "reversible product");
      exp_on = expected_on(a, b, en, rep);
      check(cell_on == exp_on, "cell power enables");
      check(cell_on_r == exp_on, "cell power enables (reversible)");
      check(!red_on && !red_on_r, "redundant multiplier off");
    end
    // module switched off by the upper-level checker (its operands are zero)
    en = 1'b0;
    a = 12'h000;
    b = 12'($urandom);
    rep = '{en: 1'b1, a_sel: 2'd1, b_sel: 2'd1};
    #1;
    check(cell_on == '0 && !red_on, "module off");
    check(p == '0 && p_r == '0, "module off product");
    n_off += (cell_on == '0) ? 1 : 0;
    en = 1'b1;
    // self-repair of cell A2xB3 (i = 1, j = 2, k = 5): inject a fault
    force dut.raw_p[5] = 8'hA5;
    force dut_r.raw_p[5] = 8'h5A;
    for (int n = 0; n < 500; n++) begin
      a = 12'($urandom) | 12'h0F0;
      b = 12'($urandom) | 12'hF00;
      rep = '0;
      #1;
      if (p != 24'(a) * 24'(b) && p_r != 24'(a) * 24'(b)) n_fault_seen++;
      rep = '{en: 1'b1, a_sel: 2'd1, b_sel: 2'd2};
      #1;
      check(p == 24'(a) * 24'(b), "repaired product");
      check(p_r == 24'(a) * 24'(b), "repaired product (reversible)");
      check(red_on && red_on_r, "redundant multiplier on");
      exp_on = expected_on(a, b, en, rep);
      check(cell_on == exp_on && !cell_on[5], "faulty cell switched off");
      if (p == 24'(a) * 24'(b)) n_repaired++;
    end
    release dut.raw_p[5];
    release dut_r.raw_p[5];
    // a stuck fault in each of the nine cells in turn, repaired each time
    for (int k = 0; k < 9; k++) begin
      inject(k, 1'b1);
      for (int n = 0; n < 50; n++) begin
        a = 12'($urandom) | 12'h888;
        b = 12'($urandom) | 12'h888;
        rep = '0;
        #1;
        if (p != 24'(a) * 24'(b) && p_r != 24'(a) * 24'(b)) n_fault_seen++;
        rep = '{en: 1'b1, a_sel: 2'(k / 3), b_sel: 2'(k % 3)};
        #1;
        check(p == 24'(a) * 24'(b) && p_r == 24'(a) * 24'(b), "repair of each cell");
        if (p == 24'(a) * 24'(b)) n_repaired++;
      end
      inject(k, 1'b0);
    end
    $display("lengths of A 4/8/12: %0d %0d %0d; faults seen %0d, repaired %0d, module off %0d",
             n_len_a[0], n_len_a[1], n_len_a[2], n_fault_seen, n_repaired, n_off);
    for (int l = 0; l < 3; l++) begin
      checks++;
      if (n_len_a[l] == 0) failures++;
    end
    checks += 3;
    if (n_fault_seen == 0) failures++;
    if (n_repaired == 0) failures++;
    if (n_off == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
