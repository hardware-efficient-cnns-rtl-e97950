// tb_fp32_add: compares the FP32 adder with a reference that adds the two
// operands in double precision and rounds once to single precision
// (fp_ref_pkg). Operands are random, with extra weight on subnormals, close
// exponents (cancellation), equal magnitudes of opposite sign, and a few
// specials (Inf, NaN, zeros).
module tb_fp32_add;
  import approx_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(fp32_t want);
    #1;
    checks++;
    if (is_nan(want) ? !is_nan(y) : (y !== want)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h got %h want %h", a, b, y, want);
    end
  endtask

  initial begin
    a = 32'h7F80_0000; b = 32'h3F80_0000; check(32'h7F80_0000);
    a = 32'h7F80_0000; b = 32'hFF80_0000; check(32'h7FC0_0000);
    a = 32'h7FC0_0001; b = 32'h3F80_0000; check(32'h7FC0_0000);
    a = 32'h8000_0000; b = 32'h8000_0000; check(32'h8000_0000);
    a = 32'h3F80_0000; b = 32'hBF80_0000; check(32'h0000_0000);
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; check(32'h7F80_0000);
    for (int n = 0; n < 20000; n++) begin
      a = $urandom; b = $urandom;
      case (n % 5)
        1: a[30:23] = 8'($urandom_range(0, 2));
        2: b[30:23] = 8'(int'(a[30:23]) + $urandom_range(0, 2) - 1);
        3: b[30:0]  = a[30:0];
        default: ;
      endcase
      if (a[30:23] == 8'hFF) a[30] = 1'b0;
      if (b[30:23] == 8'hFF) b[30] = 1'b0;
      check(r2f(f2r(a) + f2r(b)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
