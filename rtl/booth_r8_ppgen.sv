// booth_r8_ppgen: partial-product generator of the 24x24 radix-8 modified
// Booth mantissa multiplier.
//
// The unsigned 24-bit multiplier y is recoded into eight radix-8 digits in
// -4..+4, digit i taken from y[3i+2:3i-1] (y[-1] = 0). Because y is unsigned,
// a ninth row adds x when y[23] is set (digit 8 is 0 or +1). Each Booth row
// is the selected multiple 0, x, 2x, 3x or 4x (3x from one hard adder),
// one's-complemented when the digit is negative; the missing +1 goes into
// row 9 at the row's least-significant column. Sign extension is replaced by
// the modified-matrix pattern of the paper's dot diagram: row 0 ends in
// S S S ~S (columns 26..29), rows 1..7 end in ~S 1 1. The constants of the
// pattern add up to a multiple of 2^48, so the column sum of 'rows' modulo
// 2^48 is exactly x*y.
//
// Interface: rows[r][c] is the bit of row r in column c; positions that
// approx_pkg::pp_present() marks as empty are 0. Purely combinational.
// The row layout follows the dot diagram; treating digit "-0" (1111) as +0
// is this design's choice.
module booth_r8_ppgen
  import approx_pkg::*;
(
  input  logic [MANT_W-1:0]                 x,     // multiplicand (1.M or 0.M)
  input  logic [MANT_W-1:0]                 y,     // multiplier
  output logic [NUM_ROWS-1:0][PROD_W-1:0]   rows
);

  logic [25:0] x3;
  assign x3 = {2'b00, x} + {1'b0, x, 1'b0};

  always_comb begin
    logic [3:0]  grp;
    logic [25:0] mult;
    logic        neg;
    logic [26:0] pp;
    rows = '0;
    for (int i = 0; i < 8; i++) begin
      grp = {y[3*i+2], y[3*i+1], y[3*i], (i == 0) ? 1'b0 : y[(i == 0) ? 0 : 3*i-1]};
      neg = grp[3] && (grp != 4'b1111);
      unique case (grp)
        4'b0001, 4'b0010, 4'b1101, 4'b1110: mult = {2'b00, x};
        4'b0011, 4'b0100, 4'b1011, 4'b1100: mult = {1'b0, x, 1'b0};
        4'b0101, 4'b0110, 4'b1001, 4'b1010: mult = x3;
        4'b0111, 4'b1000:                   mult = {x, 2'b00};
        default:                            mult = '0;
      endcase
      pp = {1'b0, mult} ^ {27{neg}};
      if (i == 0) begin
        for (int j = 0; j < 27; j++) rows[0][j] = pp[j];
        rows[0][27] = neg;
        rows[0][28] = neg;
        rows[0][29] = ~neg;
      end else begin
        for (int j = 0; j < 26; j++) rows[i][3*i+j] = pp[j];
        rows[i][3*i+26] = ~neg;
        if (3*i+27 < PROD_W) rows[i][3*i+27] = 1'b1;
        if (3*i+28 < PROD_W) rows[i][3*i+28] = 1'b1;
      end
      rows[9][3*i] = neg;
    end
    for (int j = 0; j < MANT_W; j++) rows[8][24+j] = x[j] & y[MANT_W-1];
  end

endmodule
