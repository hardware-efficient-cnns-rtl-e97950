// fp_ref_pkg: reference conversions between IEEE 754 single precision bit
// patterns and SystemVerilog 'real' (double precision), for the testbenches.
//
// f2r() widens a single-precision pattern (normal, subnormal, zero, Inf)
// exactly. r2f() narrows a double to single precision with round to nearest,
// ties to even, including subnormal results and overflow to infinity. The
// product of two singles is exact in double precision, and so is the sum
// of two singles rounded once more (53 >= 2*24+2), so r2f(f2r(a)*f2r(b))
// and r2f(f2r(a)+f2r(b)) are the correctly rounded single-precision results.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    real m;
    if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, f[22:0], 29'd0};
      return $bitstoreal(d);
    end
    if (f[30:23] == 8'h00) begin
      m = real'(f[22:0]);
      m = m / 8388608.0;              // 2^23
      for (int i = 0; i < 126; i++) m = m / 2.0;
      return f[31] ? -m : m;
    end
    d = {f[31], 11'(int'(f[30:23]) + 896), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0]  d;
    logic         s;
    int           eb;
    logic [105:0] m;   // {hidden, 52 fraction bits} followed by 53 zero bits
    int           rsh;
    logic [22:0]  frac;
    logic         g, st, hid;
    logic [30:0]  mag;
    d  = $realtobits(r);
    s  = d[63];
    if (d[62:52] == 11'h7FF) return {s, 8'hFF, (d[51:0] != 0) ? 23'h400000 : 23'd0};
    if (d[62:52] == 11'h000) return {s, 31'd0};
    eb = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0], 53'd0};
    rsh = 0;
    if (eb < 1) begin
      rsh = (1 - eb > 60) ? 60 : 1 - eb;
      eb  = 0;
    end
    m    = m >> rsh;
    hid  = m[105];
    frac = m[104:82];
    g    = m[81];
    st   = |m[80:0];
    if (eb >= 255) return {s, 8'hFF, 23'd0};
    mag = {hid ? 8'(eb) : 8'd0, frac};
    mag = mag + 31'(g && (st || frac[0]));
    return {s, mag};
  endfunction

  function automatic bit is_nan(logic [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

endpackage
