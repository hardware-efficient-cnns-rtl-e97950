// conv_ref_pkg: reference model of one multiplier-interleaved 3x3 kernel
// beat with exact arithmetic, in the adder-tree order of conv3x3_kernel:
// ((p0+p1)+(p2+p3)) + ((p4+p5)+(p6+p7)) + p8, each operation rounded to
// single precision (fp_ref_pkg). Also gives the sum of |products|, which
// bounds the error the approximate multipliers may add, and a generator
// of FP32 test values in a moderate range.
package conv_ref_pkg;
  import approx_pkg::*;
  import fp_ref_pkg::*;

  function automatic fp32_t fadd(fp32_t a, fp32_t b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic fp32_t window_dot(fp32_t x [KSIZE], fp32_t w [KSIZE], output real abs_sum);
    fp32_t p [KSIZE];
    abs_sum = 0.0;
    for (int i = 0; i < KSIZE; i++) begin
      p[i] = r2f(f2r(x[i]) * f2r(w[i]));
      abs_sum += (f2r(p[i]) < 0.0) ? -f2r(p[i]) : f2r(p[i]);
    end
    return fadd(fadd(fadd(fadd(p[0], p[1]), fadd(p[2], p[3])),
                     fadd(fadd(p[4], p[5]), fadd(p[6], p[7]))), p[8]);
  endfunction

  // Random value of magnitude about 2^-8 .. 2^4, random sign.
  function automatic fp32_t rand_val();
    return {1'($urandom), 8'($urandom_range(119, 131)), 23'($urandom)};
  endfunction

endpackage
