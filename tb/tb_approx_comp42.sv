// tb_approx_comp42: exhaustive check of the positive and negative
// approximate 4:2 compressors. For every one of the 16 input patterns the
// expected (carry, sum) pair is derived from the number of set inputs n:
// carry = (n >= 2); the positive cell outputs 3 for n = 2 and n = 4 and n
// otherwise, the negative cell outputs 3 for n = 4 and n otherwise. The
// test also confirms the error directions: the negative cell never
// over-estimates, the positive cell's total error over all patterns is > 0.
module tb_approx_comp42;
  import approx_pkg::*;

  logic [3:0] x;
  logic       s_pos, c_pos, s_neg, c_neg;
  int checks = 0, failures = 0;
  int err_pos = 0;

  approx_comp42 #(.KIND(CK_POS)) u_pos (.x(x), .sum(s_pos), .carry(c_pos));
  approx_comp42 #(.KIND(CK_NEG)) u_neg (.x(x), .sum(s_neg), .carry(c_neg));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      int n, want_pos, want_neg, got_pos, got_neg;
      x = 4'(v);
      #1;
      n = $countones(x);
      want_pos = (n == 2 || n == 4) ? 3 : n;
      want_neg = (n == 4) ? 3 : n;
      got_pos  = 2 * int'(c_pos) + int'(s_pos);
      got_neg  = 2 * int'(c_neg) + int'(s_neg);
      checks += 3;
      if (got_pos != want_pos) begin failures++; $display("FAIL pos x=%b got %0d want %0d", x, got_pos, want_pos); end
      if (got_neg != want_neg) begin failures++; $display("FAIL neg x=%b got %0d want %0d", x, got_neg, want_neg); end
      if (got_neg > n)         begin failures++; $display("FAIL neg over-estimates x=%b", x); end
      err_pos += got_pos - n;
    end
    checks++;
    if (err_pos <= 0) begin failures++; $display("FAIL positive cell mean error not positive (%0d)", err_pos); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
