// tb_cifm_top_rev: end-to-end test of the reversible build of the combined
// integer / floating-point multiplier (REVERSIBLE = 1: TSG/NG cells and adders).
// The operation mode is switched at random between integer and floating
// point. Integer results are compared with a[23:0]*b[23:0], floating-point
// results with tb_fp_ref_pkg::fmul_ref. The test counts, and requires at least
// once each: integer and FP operations, mode switches, upper 12x12 modules
// switched off by the 24-bit checkers, single 4x4 cells switched off by the
// 12-bit checkers, only the A1xB1 cell powered (4-bit or zero operand),
// a detected injected fault, a repaired fault, FP normalisation shift,
// rounding, rounding carry, overflow and underflow.
module tb_cifm_top_rev;
  import cifm_pkg::*;
  import tb_fp_ref_pkg::*;
  mode_e       mode, last_mode;
  logic [31:0] a, b;
  repair_t     rep [N_SUB];
  logic [47:0] prod, expect_v;
  logic [35:0] cell_on;
  logic [3:0]  red_on;
  fp_events_t  ev;
  int checks = 0, failures = 0;
  int n_int = 0, n_fp = 0, n_switch = 0, n_mod_off = 0, n_cell_off = 0, n_one_on = 0;
  int n_fault = 0, n_repair = 0, n_norm = 0, n_rnd = 0, n_carry = 0, n_ovf = 0, n_unf = 0;

  cifm_top #(.REVERSIBLE(1'b1)) dut (.mode(mode), .a(a), .b(b), .rep(rep), .prod(prod), .cell_on(cell_on), .red_on(red_on));

  task automatic apply(input mode_e md, input logic [31:0] x, input logic [31:0] z);
    mode = md;
    a    = x;
    b    = z;
    #1;
    if (mode != last_mode) n_switch++;
    last_mode = mode;
    if (mode == MODE_INT) begin
      n_int++;
      expect_v = 48'(a[23:0]) * 48'(b[23:0]);
    end else begin
      n_fp++;
      expect_v = {16'd0, fmul_ref(a, b, ev)};
      n_norm  += int'(ev.norm_shift);
      n_rnd   += int'(ev.round_up);
      n_carry += int'(ev.round_carry);
      n_ovf   += int'(ev.overflow);
      n_unf   += int'(ev.underflow);
    end
    if (cell_on[35:18] == '0 && cell_on[8:0] != '0) n_mod_off++;
    if (cell_on != '0 && cell_on != '1) n_cell_off++;
    if (cell_on == 36'h1) n_one_on++;
  endtask

  task automatic check(input string what);
    checks++;
    if (prod != expect_v) begin
      failures++;
      $display("FAIL %s: mode=%s a=%h b=%h prod=%h expected %h", what, mode.name(), a, b, prod, expect_v);
    end
  endtask

  function automatic logic [31:0] rand_int();
    return 32'($urandom) >> $urandom_range(0, 31);
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < N_SUB; m++) rep[m] = '0;
    last_mode = MODE_INT;
    // directed
    apply(MODE_INT, 32'h00FF_FFFF, 32'h00FF_FFFF); check("int max");
    apply(MODE_FP,  32'h3F80_0001, 32'h3FFF_FFFE); check("fp rounding carry");
    apply(MODE_FP,  32'h7F00_0000, 32'h4000_0000); check("fp overflow");
    apply(MODE_FP,  32'h0080_0000, 32'h3F00_0000); check("fp underflow");
    apply(MODE_FP,  32'h0000_0000, 32'h4000_0000); check("fp zero");
    apply(MODE_INT, 32'h0000_0123, 32'h0000_0045); check("int short");
    // random mix of modes
    for (int n = 0; n < 20000; n++) begin
      if ($urandom_range(0, 1) == 0) apply(MODE_INT, rand_int(), rand_int());
      else                           apply(MODE_FP, rand_fp(), rand_fp());
      check("random");
    end
    // fault in cell A2xB2 of the 12x12 modules; repaired through rep
    force dut.u_mul.g_sub[0].u_mul.raw_p[4] = 8'h00;
    for (int n = 0; n < 1000; n++) begin
      for (int m = 0; m < N_SUB; m++) rep[m] = '0;
      if (n % 2) apply(MODE_INT, 32'($urandom) | 32'h00F0_F0F0, 32'($urandom) | 32'h00F0_F0F0);
      else       apply(MODE_FP, {$urandom_range(0, 1) == 1, 8'($urandom_range(100, 150)), 23'($urandom) | 23'h70F0F0},
                                {$urandom_range(0, 1) == 1, 8'($urandom_range(100, 150)), 23'($urandom) | 23'h70F0F0});
      if (prod != expect_v) n_fault++;
      for (int m = 0; m < N_SUB; m++) rep[m] = '{en: 1'b1, a_sel: 2'd1, b_sel: 2'd1};
      #1;
      check("repaired");
      if (prod == expect_v && red_on == 4'hF && !cell_on[4]) n_repair++;
    end
    release dut.u_mul.g_sub[0].u_mul.raw_p[4];
    $display("int %0d fp %0d switches %0d | module off %0d cell off %0d single cell on %0d | fault %0d repaired %0d",
             n_int, n_fp, n_switch, n_mod_off, n_cell_off, n_one_on, n_fault, n_repair);
    $display("fp: norm shift %0d round up %0d round carry %0d overflow %0d underflow %0d",
             n_norm, n_rnd, n_carry, n_ovf, n_unf);
    checks += 13;
    if (n_int == 0)      failures++;
    if (n_fp == 0)       failures++;
    if (n_switch == 0)   failures++;
    if (n_mod_off == 0)  failures++;
    if (n_cell_off == 0) failures++;
    if (n_one_on == 0)  failures++;
    if (n_fault == 0)    failures++;
    if (n_repair == 0)   failures++;
    if (n_norm == 0)     failures++;
    if (n_rnd == 0)      failures++;
    if (n_carry == 0)    failures++;
    if (n_ovf == 0)      failures++;
    if (n_unf == 0)      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
