// approx_comp42: approximate 4:2 compressor without carry-in or carry-out.
//
// Four bits of one column in, a sum bit (same column) and a carry bit (next
// column) out, so the cell can represent at most 3 where the exact count of
// its inputs reaches 4. The carry is always "at least two inputs are 1". The
// two kinds differ only in the sum bit:
//   CK_POS (positive compressor): sum = OR of the inputs. Exact for counts
//     0, 1 and 3; +1 for count 2 (6 of 16 input patterns), -1 for count 4
//     (1 pattern). Mean error is positive.
//   CK_NEG (negative compressor): sum = parity OR all-ones. Exact except for
//     count 4, where it gives 3; its error is never positive.
// Purely combinational.
//
// The split into positive and negative compressors by error direction is the
// paper's; the particular gate equations are this design's own simplest
// choice, since the compressor circuits themselves are published elsewhere.
module approx_comp42
  import approx_pkg::*;
#(
  parameter comp_kind_e KIND = CK_POS
) (
  input  logic [3:0] x,
  output logic       sum,
  output logic       carry
);

  assign carry = (x[0] & x[1]) | (x[2] & x[3]) | ((x[0] | x[1]) & (x[2] | x[3]));

  if (KIND == CK_NEG) begin : g_neg
    assign sum = (^x) | (&x);
  end else begin : g_pos
    assign sum = |x;
  end

  initial assert (KIND != CK_EXACT) else $error("approx_comp42: KIND must be CK_POS or CK_NEG");

endmodule
