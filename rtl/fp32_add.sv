// fp32_add: exact IEEE 754 single-precision adder used to sum the products
// of a kernel window and to accumulate over input channels.
//
// Combinational. The operand with the larger magnitude is put first, the
// other one's significand is aligned to it with a sticky bit that collects
// everything shifted out, the two are added or subtracted, and the result
// is normalised (one step right after a carry, a leading-zero shift left
// after a cancellation, stopping at the subnormal range) and rounded to
// nearest, ties to even. An exact cancellation gives +0. NaN operands or
// (+Inf) + (-Inf) give the quiet NaN 0x7FC00000; other infinities pass.
//
// The paper keeps exact arithmetic outside the kernel multiplications but
// does not describe the adder; this one is this design's own, written as the
// simplest correctly rounded FP32 adder.
module fp32_add
  import approx_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic [31:0] p, q;            // |p| >= |q|
    logic        sp, sq, sub;
    logic [7:0]  ep, eq;
    logic [26:0] mp, mq, mqs;     // {hidden, 23 fraction, guard, round, sticky}
    logic [7:0]  d;
    logic [27:0] sum;
    logic signed [9:0] e;
    int unsigned lz, shl;
    logic [26:0] n;
    logic [22:0] frac;
    logic        rnd;
    logic [30:0] mag;

    lz = 0; shl = 0; n = '0;
    if (a[30:0] >= b[30:0]) begin p = a; q = b; end
    else                    begin p = b; q = a; end
    sp = p[31]; sq = q[31]; sub = sp ^ sq;
    ep = p[30:23]; eq = q[30:23];
    mp = {(ep != 0), p[22:0], 3'b000};
    mq = {(eq != 0), q[22:0], 3'b000};
    // exponent difference, subnormals counting as exponent 1
    d  = ((ep == 0) ? 8'd1 : ep) - ((eq == 0) ? 8'd1 : eq);
    if (d >= 8'd27) mqs = {26'd0, |mq};
    else begin
      mqs = mq >> d;
      mqs[0] = mqs[0] | |(mq & ((27'd1 << d) - 27'd1));
    end
    sum = sub ? ({1'b0, mp} - {1'b0, mqs}) : ({1'b0, mp} + {1'b0, mqs});
    e   = 10'(signed'({2'b0, (ep == 0) ? 8'd1 : ep}));

    if (sum[27]) begin
      n = {sum[27:2], sum[1] | sum[0]};
      e = e + 10'sd1;
    end else begin
      lz = 27;
      for (int i = 0; i < 27; i++) if (sum[i]) lz = 26 - i;
      // shift left, but not below exponent 1 (subnormal result)
      shl = (lz == 27) ? 0 : ((int'(e) - 1 < int'(lz)) ? int'(e) - 1 : lz);
      n = sum[26:0] << shl;
      e = e - 10'(shl);
    end
    frac = n[25:3];
    rnd  = n[2] && (n[1] || n[0] || frac[0]);
    mag  = {(n[26] ? e[7:0] : 8'd0), frac};
    if (e >= 10'sd255) mag = {8'hFF, 23'd0};
    else               mag = mag + 31'(rnd);

    if ((ep == 8'hFF && p[22:0] != 0) || (eq == 8'hFF && q[22:0] != 0)) y = FP32_QNAN;
    else if (ep == 8'hFF && eq == 8'hFF && sub)                         y = FP32_QNAN;
    else if (ep == 8'hFF)                                               y = p;
    else if (sum == 0)                                                  y = (sp & sq) ? 32'h8000_0000 : 32'h0;
    else                                                                y = {sp, mag};
  end

endmodule
