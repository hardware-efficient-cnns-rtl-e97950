// r8mabm_24x24: 24x24 radix-8 modified approximate Booth multiplier (R8MABM),
// the mantissa multiplier of the approximate FP32 multipliers.
//
// Three stages, all combinational:
//   1. booth_r8_ppgen builds the 10-row partial-product matrix (PPM).
//   2. A column-compression tree reduces every column to at most two bits.
//      In each stage and column the bits are taken from the bottom: in
//      columns 0..23 (APPROX_COLS) groups of four go into approximate 4:2
//      compressors (approx_comp42), whose kind, positive or negative, is
//      chosen per (stage, column) by approx_pkg::comp_kind() from the
//      multiplier type MT (NI, SI, CI or CSI interleaving). A left-over group
//      of three goes into an exact full adder, two left-over bits into an
//      exact half adder, a single bit passes to the next stage. Columns
//      24..47 use exact full and half adders only. Both the exact and the
//      approximate trees need four stages to get from 9 bits to 2.
//   3. A carry-propagate adder adds the two remaining rows (48 bits, carry
//      out of column 47 dropped).
// The tree shape is worked out at elaboration: red_table() simulates the
// column heights stage by stage, and the generate loops place one cell per
// group. With MT = MT_EXACT every cell is exact and p == x*y.
//
// Follows the paper: radix-8 Booth recoding, the modified PPM, approximate
// compressors confined to the 24 low columns in every stage, the placement
// pattern of PCs and NCs, and the final fast adder. This design's own
// choices: the greedy Wallace-style grouping (the paper's dot diagram
// groups bits in boxes of two to five, and its rows shrink 9-4-3-2), exact
// full and half adders in place of the exact compressors, and the
// compressor equations.
module r8mabm_24x24
  import approx_pkg::*;
#(
  parameter mul_type_e MT = MT_PMCSI
) (
  input  logic [MANT_W-1:0] x,
  input  logic [MANT_W-1:0] y,
  output logic [PROD_W-1:0] p
);

  localparam int unsigned HW  = 5;                               // bits per height entry
  localparam int unsigned TBW = (MAX_STAGES + 1) * PROD_W * HW;

  function automatic int unsigned n42_of(int unsigned h, comp_kind_e k);
    return (k == CK_EXACT) ? 0 : h / 4;
  endfunction
  function automatic int unsigned nfa_of(int unsigned h, comp_kind_e k);
    return (h - 4 * n42_of(h, k)) / 3;
  endfunction
  function automatic int unsigned nha_of(int unsigned h, comp_kind_e k);
    return ((h - 4 * n42_of(h, k) - 3 * nfa_of(h, k)) == 2) ? 1 : 0;
  endfunction
  function automatic int unsigned own_of(int unsigned h, comp_kind_e k);
    // bits a column keeps for itself in the next stage
    return h - 3 * n42_of(h, k) - 2 * nfa_of(h, k) - nha_of(h, k);
  endfunction
  function automatic int unsigned cout_of(int unsigned h, comp_kind_e k);
    // carries a column sends to the next column
    return n42_of(h, k) + nfa_of(h, k) + nha_of(h, k);
  endfunction

  // Height of every column at every stage, packed HW bits per entry, plus the
  // number of stages needed to reach at most two bits per column.
  function automatic logic [TBW-1:0] red_table(mul_type_e mt);
    int unsigned h [(MAX_STAGES+1)*PROD_W];
    logic [TBW-1:0] t;
    int unsigned mx;
    int unsigned n;
    for (int c = 0; c < PROD_W; c++) begin
      n = 0;
      for (int r = 0; r < NUM_ROWS; r++) if (pp_present(r, c)) n = n + 1;
      h[c] = n;
    end
    for (int s = 0; s < MAX_STAGES; s++) begin
      mx = 0;
      for (int c = 0; c < PROD_W; c++) if (h[s*PROD_W+c] > mx) mx = h[s*PROD_W+c];
      for (int c = 0; c < PROD_W; c++) begin
        if (mx <= 2) n = h[s*PROD_W+c];
        else begin
          n = own_of(h[s*PROD_W+c], comp_kind(mt, s, c));
          if (c > 0) n = n + cout_of(h[s*PROD_W+c-1], comp_kind(mt, s, c-1));
        end
        h[(s+1)*PROD_W+c] = n;
      end
    end
    t = '0;
    for (int i = 0; i < (MAX_STAGES+1)*PROD_W; i++) t[i*HW +: HW] = HW'(h[i]);
    return t;
  endfunction

  localparam logic [TBW-1:0] HT = red_table(MT);

  function automatic int unsigned ht(int unsigned s, int unsigned c);
    return int'(HT[(s*PROD_W+c)*HW +: HW]);
  endfunction

  function automatic int unsigned num_stages();
    for (int s = 0; s <= MAX_STAGES; s++) begin
      int unsigned mx = 0;
      for (int c = 0; c < PROD_W; c++) if (ht(s, c) > mx) mx = ht(s, c);
      if (mx <= 2) return s;
    end
    return MAX_STAGES + 1;
  endfunction

  localparam int unsigned NS = num_stages();

  initial assert (NS <= MAX_STAGES) else $error("r8mabm_24x24: reduction does not converge");

  // g_lvl[s].b[c] holds the bits of column c at the input of stage s.
  logic [NUM_ROWS-1:0][PROD_W-1:0] rows;
  for (genvar s = 0; s <= NS; s++) begin : g_lvl
    logic [MAX_HEIGHT-1:0] b [PROD_W];
  end

  booth_r8_ppgen u_ppgen (.x(x), .y(y), .rows(rows));

  // Slot of row r in column c at stage 0: present rows are stacked in row order.
  function automatic int unsigned slot0(int unsigned r, int unsigned c);
    int unsigned k = 0;
    for (int unsigned i = 0; i < r; i++) if (pp_present(i, c)) k = k + 1;
    return k;
  endfunction

  function automatic logic [MAX_HEIGHT-1:0] low_mask(int unsigned n);
    return (MAX_HEIGHT'(1) << n) - MAX_HEIGHT'(1);
  endfunction

  // Stage 0: stack the present PPM bits of each column.
  for (genvar c = 0; c < PROD_W; c++) begin : g_col0
    for (genvar r = 0; r < NUM_ROWS; r++) begin : g_row
      if (pp_present(r, c)) begin : g_bit
        assign g_lvl[0].b[c][slot0(r, c)] = rows[r][c];
      end
    end
    assign g_lvl[0].b[c][MAX_HEIGHT-1:ht(0, c)] = '0;
  end

  // Stages 1..NS. Column c of the next stage holds, from slot 0 up: the sum
  // bits of its cells, the bits passed through, the carries of column c-1.
  for (genvar s = 0; s < NS; s++) begin : g_stage
    for (genvar c = 0; c < PROD_W; c++) begin : g_col
      localparam int unsigned      H    = ht(s, c);
      localparam comp_kind_e       K    = comp_kind(MT, s, c);
      localparam int unsigned      N42  = n42_of(H, K);
      localparam int unsigned      NFA  = nfa_of(H, K);
      localparam int unsigned      NHA  = nha_of(H, K);
      localparam int unsigned      OWN  = own_of(H, K);
      localparam int unsigned      NC   = N42 + NFA + NHA;        // cells in this column
      localparam int unsigned      NP   = OWN - NC;               // bits passed through
      localparam int unsigned      PB   = 4*N42 + 3*NFA + 2*NHA;  // first passed bit
      localparam int unsigned      CIN  = (c > 0) ? cout_of(ht(s, c-1), comp_kind(MT, s, c-1)) : 0;

      logic [MAX_HEIGHT-1:0] in;
      logic [NC:0]           sums;      // one spare bit keeps the vectors non-empty
      logic [NC:0]           carries;
      logic [MAX_HEIGHT-1:0] cin;

      assign in = g_lvl[s].b[c];

      for (genvar g = 0; g < N42; g++) begin : g_c42
        approx_comp42 #(.KIND(K)) u_c42 (
          .x     (in[4*g +: 4]),
          .sum   (sums[g]),
          .carry (carries[g])
        );
      end
      for (genvar f = 0; f < NFA; f++) begin : g_fa
        assign {carries[N42+f], sums[N42+f]} =
            2'(in[4*N42+3*f]) + 2'(in[4*N42+3*f+1]) + 2'(in[4*N42+3*f+2]);
      end
      if (NHA != 0) begin : g_ha
        assign carries[N42+NFA] = in[4*N42+3*NFA] & in[4*N42+3*NFA+1];
        assign sums[N42+NFA]    = in[4*N42+3*NFA] ^ in[4*N42+3*NFA+1];
      end
      assign sums[NC]    = 1'b0;
      assign carries[NC] = 1'b0;

      if (c > 0) begin : g_cin
        assign cin = MAX_HEIGHT'(g_stage[s].g_col[c-1].carries) & low_mask(CIN);
      end else begin : g_nocin
        assign cin = '0;
      end

      assign g_lvl[s+1].b[c] = (MAX_HEIGHT'(sums) & low_mask(NC))
                             | (((in >> PB) & low_mask(NP)) << NC)
                             | (cin << OWN);
    end
  end

  // Final carry-propagate adder on the two remaining rows.
  logic [PROD_W-1:0] row_a, row_b;
  for (genvar c = 0; c < PROD_W; c++) begin : g_final
    assign row_a[c] = g_lvl[NS].b[c][0];
    assign row_b[c] = g_lvl[NS].b[c][1];
  end
  assign p = row_a + row_b;

endmodule
