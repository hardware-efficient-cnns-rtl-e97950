// fp32_approx_mul: IEEE 754 single-precision multiplier whose 24x24
// mantissa product comes from one R8MABM variant (parameter MT).
//
// Datapath (combinational):
//   sign     = sa XOR sb
//   mantissa = r8mabm_24x24 on {hidden, M}; the hidden bit is 1 for normal
//              and 0 for subnormal operands, whose exponent counts as 1
//   exponent = Ea + Eb - 127, corrected by the normalisation shift
// The 48-bit product is normalised with a leading-zero count (needed when an
// operand is subnormal), shifted right again when the result underflows into
// the subnormal range, and rounded to nearest, ties to even, using the
// mantissa/exponent concatenation so that a rounding carry bumps the
// exponent and an overflow lands on infinity. Special operands follow
// IEEE 754: NaN in or 0 x Inf gives the quiet NaN 0x7FC00000; Inf x finite
// gives a signed infinity; zero gives a signed zero.
//
// With MT = MT_EXACT the result is the correctly rounded IEEE product. The
// sign/exponent/mantissa split and the handling of the hidden bit follow the
// paper; the rounding mode, the subnormal results and the special cases are
// not discussed there and are this design's choice.
module fp32_approx_mul
  import approx_pkg::*;
#(
  parameter mul_type_e MT = MT_PMCSI
) (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [23:0] xa, xb;
  logic [47:0] prod;

  assign {sa, ea, ma} = a;
  assign {sb, eb, mb} = b;
  assign sy = sa ^ sb;
  assign xa = {ea != 8'd0, ma};
  assign xb = {eb != 8'd0, mb};

  r8mabm_24x24 #(.MT(MT)) u_mant (.x(xa), .y(xb), .p(prod));

  always_comb begin
    logic              a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
    int unsigned       lz;
    logic signed [11:0] e;
    logic [47:0]       pn;
    logic [95:0]       sh;
    int unsigned       rsh;
    logic [22:0]       frac;
    logic              g, st, rnd;
    logic [30:0]       mag;

    a_nan  = (ea == 8'hFF) && (ma != 0);
    b_nan  = (eb == 8'hFF) && (mb != 0);
    a_inf  = (ea == 8'hFF) && (ma == 0);
    b_inf  = (eb == 8'hFF) && (mb == 0);
    a_zero = (ea == 8'h00) && (ma == 0);
    b_zero = (eb == 8'h00) && (mb == 0);

    // leading zeros of the product
    lz = 48;
    for (int i = 0; i < 48; i++) if (prod[i]) lz = 47 - i;
    pn = (lz < 48) ? (prod << lz) : '0;
    // biased exponent of pn[47] as the hidden bit
    e = 12'(signed'({4'b0, (ea == 0) ? 8'd1 : ea})) + 12'(signed'({4'b0, (eb == 0) ? 8'd1 : eb}))
        - 12'sd126 - 12'(lz);
    // results below the normal range become subnormal
    rsh = 0;
    if (e < 12'sd1) begin
      rsh = (e < -12'sd60) ? 62 : 1 - int'(e);
      e   = 12'sd0;
    end
    sh   = {pn, 48'b0} >> rsh;
    frac = sh[94:72];
    g    = sh[71];
    st   = |sh[70:0];
    rnd  = g && (st || frac[0]);
    // exponent field: a result whose hidden bit was shifted out is subnormal
    mag  = {(sh[95] ? e[7:0] : 8'd0), frac};
    if (e >= 12'sd255) mag = {8'hFF, 23'd0};
    else               mag = mag + 31'(rnd);

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = FP32_QNAN;
    else if (a_inf || b_inf)                                      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero || lz == 48)                        y = {sy, 31'd0};
    else                                                          y = {sy, mag};
  end

endmodule
