// tb_cifm24: tests the 24x24 CIFM block, standard and reversible builds.
//   * random operands of random length (4..24 bits) against a*b, plus corners;
//   * power enables of all 36 cells and 4 redundant multipliers against an
//     independent rule: module m is on when its upper halves (if any) are
//     non-zero, cell (i,j) of it when its nibbles lie inside the operand
//     lengths, and a repaired cell is off;
//   * self-repair: a faulty cell (output forced); wrong product without
//     repair, right product with the redundant multipliers in use.
// Counts: upper-half module switch-off, cell switch-off, faults seen, repairs.
module tb_cifm24;
  import cifm_pkg::*;
  logic [23:0] a, b;
  repair_t     rep [N_SUB];
  logic [47:0] p, p_r;
  logic [35:0] cell_on, cell_on_r, exp_on;
  logic [3:0]  red_on, red_on_r, exp_red;
  int checks = 0, failures = 0;
  int n_mod_off = 0, n_cell_off = 0, n_fault = 0, n_repair = 0;

  cifm24 #(.REVERSIBLE(1'b0)) dut   (.a(a), .b(b), .rep(rep), .p(p),   .cell_on(cell_on),   .red_on(red_on));
  cifm24 #(.REVERSIBLE(1'b1)) dut_r (.a(a), .b(b), .rep(rep), .p(p_r), .cell_on(cell_on_r), .red_on(red_on_r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%h b=%h p=%h p_r=%h exp=%h on=%h exp_on=%h",
               what, a, b, p, p_r, 48'(a) * 48'(b), cell_on, exp_on);
    end
  endtask

  // independent power-enable model
  task automatic expected(output logic [35:0] on, output logic [3:0] red);
    logic [11:0] xa, xb;
    logic        men, rp;
    for (int m = 0; m < 4; m++) begin
      xa  = (m == SUB_HL || m == SUB_HH) ? a[23:12] : a[11:0];
      xb  = (m == SUB_LH || m == SUB_HH) ? b[23:12] : b[11:0];
      men = ((m == SUB_HL || m == SUB_HH) ? (a[23:12] != 0) : 1'b1) &&
            ((m == SUB_LH || m == SUB_HH) ? (b[23:12] != 0) : 1'b1);
      red[m] = men && rep[m].en && rep[m].a_sel < 3 && rep[m].b_sel < 3;
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) begin
          rp = red[m] && rep[m].a_sel == 2'(i) && rep[m].b_sel == 2'(j);
          on[9*m + 3*i + j] = men && !rp && (i == 0 || (xa >> (4 * i)) != 0)
                              && (j == 0 || (xb >> (4 * j)) != 0);
        end
    end
  endtask

  task automatic apply_and_check();
    #1;
    expected(exp_on, exp_red);
    check(p == 48'(a) * 48'(b), "product");
    check(p_r == 48'(a) * 48'(b), "reversible product");
    check(cell_on == exp_on && cell_on_r == exp_on, "cell enables");
    check(red_on == exp_red && red_on_r == exp_red, "redundant enables");
    if (cell_on[35:27] == '0 && cell_on[26:18] == '0) n_mod_off++;
    if (cell_on != '1) n_cell_off++;
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 4; m++) rep[m] = '0;
    a = '1; b = '1; apply_and_check();
    a = '0; b = '1; apply_and_check();
    a = 24'h800000; b = 24'h000001; apply_and_check();
    for (int n = 0; n < 3000; n++) begin
      a = 24'($urandom) >> $urandom_range(0, 20);
      b = 24'($urandom) >> $urandom_range(0, 20);
      apply_and_check();
    end
    // faulty cell A2xB2 (k = 4); the same cell index is repaired in all
    // four 12x12 modules, so the test holds whether the simulator applies the
    // force to one instance of the module or to all of them
    force dut.g_sub[1].u_mul.raw_p[4]   = 8'h00;
    force dut_r.g_sub[1].u_mul.raw_p[4] = 8'hFF;
    for (int n = 0; n < 500; n++) begin
      a = 24'($urandom) | 24'hF0F0F0;
      b = 24'($urandom) | 24'hF0F0F0;
      for (int m = 0; m < 4; m++) rep[m] = '0;
      #1;
      if (p != 48'(a) * 48'(b) && p_r != 48'(a) * 48'(b)) n_fault++;
      for (int m = 0; m < 4; m++) rep[m] = '{en: 1'b1, a_sel: 2'd1, b_sel: 2'd1};
      apply_and_check();
      if (p == 48'(a) * 48'(b) && red_on == 4'hF) n_repair++;
    end
    $display("module off %0d, cell off %0d, faults seen %0d, repaired %0d",
             n_mod_off, n_cell_off, n_fault, n_repair);
    checks += 4;
    if (n_mod_off == 0) failures++;
    if (n_cell_off == 0) failures++;
    if (n_fault == 0) failures++;
    if (n_repair == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
