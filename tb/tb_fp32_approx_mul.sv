// tb_fp32_approx_mul: checks the nine FP32 multipliers side by side.
//
// The exact variant must give the correctly rounded IEEE product (reference:
// double-precision product rounded once, fp_ref_pkg), for normal,
// subnormal, overflowing and special operands. The eight approximate
// variants must handle specials, signs and exponents exactly like it and
// stay within a relative error of 1e-4 of the exact product for normal
// results; the test reports error rate, mean absolute bit error (Hamming
// distance to the exact result), mean relative error and PRED_1 (share of
// results within 1 % of the exact one) per variant, the metrics the error
// analysis of these multipliers uses, and requires PRED_1 >= 99.2 % and a
// non-zero error rate.
module tb_fp32_approx_mul;
  import approx_pkg::*;
  import fp_ref_pkg::*;

  localparam int NV   = 9;
  localparam int NVEC = 20000;

  fp32_t a, b;
  fp32_t y [NV];
  int checks = 0, failures = 0;

  fp32_approx_mul #(.MT(MT_EXACT)) u0 (.a(a), .b(b), .y(y[0]));
  fp32_approx_mul #(.MT(MT_PMNI))  u1 (.a(a), .b(b), .y(y[1]));
  fp32_approx_mul #(.MT(MT_PMSI))  u2 (.a(a), .b(b), .y(y[2]));
  fp32_approx_mul #(.MT(MT_PMCI))  u3 (.a(a), .b(b), .y(y[3]));
  fp32_approx_mul #(.MT(MT_PMCSI)) u4 (.a(a), .b(b), .y(y[4]));
  fp32_approx_mul #(.MT(MT_NMNI))  u5 (.a(a), .b(b), .y(y[5]));
  fp32_approx_mul #(.MT(MT_NMSI))  u6 (.a(a), .b(b), .y(y[6]));
  fp32_approx_mul #(.MT(MT_NMCI))  u7 (.a(a), .b(b), .y(y[7]));
  fp32_approx_mul #(.MT(MT_NMCSI)) u8 (.a(a), .b(b), .y(y[8]));

  mul_type_e types [NV] = '{MT_EXACT, MT_PMNI, MT_PMSI, MT_PMCI, MT_PMCSI,
                            MT_NMNI, MT_NMSI, MT_NMCI, MT_NMCSI};

  int  n_err [NV];
  int  n_pred [NV];
  int  n_stat;
  real sum_hd [NV];
  real sum_re [NV];

  initial begin : watchdog
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL %s a=%h b=%h", msg, a, b);
  endtask

  // Specials: every variant gives the IEEE answer.
  task automatic check_special(fp32_t want);
    #1;
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (is_nan(want) ? !is_nan(y[v]) : (y[v] !== want)) fail($sformatf("%s special got %h want %h", types[v].name(), y[v], want));
    end
  endtask

  // Random operands in the given exponent window.
  task automatic check_random(bit stats);
    fp32_t want;
    real   re, rx, ry;
    #1;
    want = r2f(f2r(a) * f2r(b));
    checks++;
    if (y[0] !== want) fail($sformatf("EXACT got %h want %h", y[0], want));
    if (!stats) return;
    n_stat++;
    rx = f2r(y[0]);
    for (int v = 1; v < NV; v++) begin
      ry = f2r(y[v]);
      re = (ry - rx) / rx;
      if (y[v] != y[0]) n_err[v]++;
      sum_hd[v] += $countones(y[v] ^ y[0]);
      sum_re[v] += re;
      if (re < 0.01 && re > -0.01) n_pred[v]++;
      checks += 2;
      if (y[v][31] !== y[0][31]) fail($sformatf("%s sign", types[v].name()));
      if (re > 1.0e-4 || re < -1.0e-4) fail($sformatf("%s rel. error %g", types[v].name(), re));
    end
  endtask

  initial begin
    foreach (n_err[v]) begin n_err[v] = 0; n_pred[v] = 0; sum_hd[v] = 0.0; sum_re[v] = 0.0; end
    n_stat = 0;
    a = 32'h7FC0_0000; b = 32'h3F80_0000; check_special(32'h7FC0_0000);
    a = 32'h7F80_0000; b = 32'h0000_0000; check_special(32'h7FC0_0000);
    a = 32'h7F80_0000; b = 32'hBF80_0000; check_special(32'hFF80_0000);
    a = 32'h8000_0000; b = 32'h3F80_0000; check_special(32'h8000_0000);
    a = 32'h0000_0000; b = 32'hC000_0000; check_special(32'h8000_0000);
    a = 32'h7F00_0000; b = 32'h7F00_0000; check_special(32'h7F80_0000);
    a = 32'h3F80_0000; b = 32'h3F80_0000; check_special(32'h3F80_0000);
    // exact variant over the whole range, subnormals included
    for (int n = 0; n < NVEC; n++) begin
      a = $urandom; b = $urandom;
      if (n % 3 == 1) a[30:23] = 8'($urandom_range(0, 2));
      if (a[30:23] == 8'hFF) a[30] = 1'b0;
      if (b[30:23] == 8'hFF) b[30] = 1'b0;
      check_random(1'b0);
    end
    // all variants, normal operands and normal results
    for (int n = 0; n < NVEC; n++) begin
      a = {1'($urandom), 8'($urandom_range(64, 190)), 23'($urandom)};
      b = {1'($urandom), 8'($urandom_range(64, 190)), 23'($urandom)};
      check_random(1'b1);
    end
    for (int v = 1; v < NV; v++) begin
      real er, pred;
      er   = 100.0 * n_err[v] / n_stat;
      pred = 100.0 * n_pred[v] / n_stat;
      $display("%-9s ER=%6.2f%%  MABE=%5.3f  MRE=%9.3e  PRED1=%6.2f%%", types[v].name(), er,
               sum_hd[v] / n_stat, sum_re[v] / n_stat, pred);
      checks += 2;
      if (n_err[v] == 0) fail($sformatf("%s never differs from exact", types[v].name()));
      if (pred < 99.2)   fail($sformatf("%s PRED1 below 99.2%%", types[v].name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
