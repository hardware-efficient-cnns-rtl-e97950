// approx_pkg: types and constants shared by the approximate FP32 multiplier
// family and the interleaved-kernel convolution datapath.
//
// mul_type_e enumerates the nine FP32 multipliers of the pool: the exact one
// and eight approximate ones. An approximate multiplier is either "positive"
// (PM, built from positive-error compressors first) or "negative" (NM), and
// places its positive (PC) and negative (NC) compressors by one of four
// interleaving schemes: NI (one kind everywhere), SI (alternate per reduction
// stage), CI (alternate per column) and CSI (alternate per column and stage).
// The 4-bit codes of the enum are this design's own choice.
//
// comp_kind() decides which compressor sits at a given (stage, column) of the
// mantissa partial-product reduction. Columns at or above APPROX_COLS always
// get exact cells. The column/stage checkerboard of CSI follows the dot
// diagram of the PMCSI multiplier (column 23 of the first stage holds a
// positive compressor, column 22 a negative one, and the second stage is the
// inverse); the phase chosen for SI and CI is this design's extension of it.
//
// DEFAULT_SEQ is the per-slot multiplier assignment of the 198 kernel slots.
// The optimised sequence itself is not published, so the default cycles
// through the eight approximate multipliers in their accuracy ranking
// (PMCSI, NMSI, NMCSI, NMNI, PMSI, PMCI, PMNI, NMCI), i.e. a K=8 interleave.
package approx_pkg;

  typedef enum logic [3:0] {
    MT_EXACT = 4'd0,
    MT_PMNI  = 4'd1,
    MT_PMSI  = 4'd2,
    MT_PMCI  = 4'd3,
    MT_PMCSI = 4'd4,
    MT_NMNI  = 4'd5,
    MT_NMSI  = 4'd6,
    MT_NMCI  = 4'd7,
    MT_NMCSI = 4'd8
  } mul_type_e;

  typedef enum logic [1:0] {
    CK_EXACT = 2'd0,
    CK_POS   = 2'd1,
    CK_NEG   = 2'd2
  } comp_kind_e;

  // Mantissa multiplier geometry (24x24 radix-8 Booth, 48-bit product).
  localparam int unsigned MANT_W      = 24;
  localparam int unsigned PROD_W      = 48;
  localparam int unsigned NUM_PP      = 9;   // 8 Booth rows + 1 row for the top multiplier bit
  localparam int unsigned NUM_ROWS    = 10;  // the 9 rows above + 1 row of negation-correction bits
  localparam int unsigned APPROX_COLS = 24;  // approximate compressors in columns 0..23
  localparam int unsigned MAX_HEIGHT  = 16;  // slots per column in the reduction arrays
  localparam int unsigned MAX_STAGES  = 8;

  // CNN geometry.
  localparam int unsigned KSIZE      = 9;    // 3x3 kernel
  localparam int unsigned L1_KERNELS = 10;
  localparam int unsigned L2_KERNELS = 12;
  localparam int unsigned NSLOTS     = (L1_KERNELS + L2_KERNELS) * KSIZE;  // 198

  typedef logic [31:0] fp32_t;     // IEEE 754 single-precision bit pattern

  localparam fp32_t FP32_QNAN = 32'h7FC0_0000;

  // Which (row, column) positions of the partial-product matrix hold a bit.
  // Rows 0..7 are the Booth rows, shifted by 3 bits each; row 0 carries the
  // sign pattern S S S ~S in columns 26..29, rows 1..7 carry ~S 1 1 above
  // their 26 magnitude bits. Row 8 is the multiplicand gated by the top bit
  // of the multiplier (columns 24..47). Row 9 holds the +1 correction bit S
  // of each negated Booth row, at column 3*i.
  function automatic bit pp_present(int unsigned r, int unsigned c);
    if (c >= PROD_W) return 1'b0;
    if (r == 0)      return c <= 29;
    if (r <= 7)      return (c >= 3*r) && (c <= 3*r + 28);
    if (r == 8)      return c >= 24;
    if (r == 9)      return (c % 3 == 0) && (c <= 21);
    return 1'b0;
  endfunction

  // Compressor placed at reduction stage 'stage' (0 = first) and column 'col'.
  function automatic comp_kind_e comp_kind(mul_type_e mt, int unsigned stage, int unsigned col);
    logic pos_first;
    logic pick_first;
    if (mt == MT_EXACT || col >= APPROX_COLS) return CK_EXACT;
    pos_first = (mt == MT_PMNI || mt == MT_PMSI || mt == MT_PMCI || mt == MT_PMCSI);
    unique case (mt)
      MT_PMNI, MT_NMNI:   pick_first = 1'b1;
      MT_PMSI, MT_NMSI:   pick_first = (stage % 2) == 0;
      MT_PMCI, MT_NMCI:   pick_first = (col % 2) == 1;
      default:            pick_first = ((stage + col) % 2) == 1;   // CSI
    endcase
    return (pick_first == pos_first) ? CK_POS : CK_NEG;
  endfunction

  // Rank order of the approximate multipliers by CNN accuracy (best first).
  function automatic mul_type_e rank_type(int unsigned r);
    unique case (r % 8)
      0: return MT_PMCSI;
      1: return MT_NMSI;
      2: return MT_NMCSI;
      3: return MT_NMNI;
      4: return MT_PMSI;
      5: return MT_PMCI;
      6: return MT_PMNI;
      default: return MT_NMCI;
    endcase
  endfunction

  function automatic logic [NSLOTS*4-1:0] default_seq();
    logic [NSLOTS*4-1:0] s;
    for (int unsigned i = 0; i < NSLOTS; i++) s[i*4 +: 4] = rank_type(i);
    return s;
  endfunction

  localparam logic [NSLOTS*4-1:0] DEFAULT_SEQ = default_seq();

endpackage
