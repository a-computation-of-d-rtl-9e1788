// first_bit: the "fst" block of the CountConnected core.
//
// Keeps only the lowest set bit of a 128-bit set (x AND two's-complement of x), which picks the
// node that seeds the next connected component. Zero in gives zero out. Combinational.
// The paper names the block; the two's-complement form is this design's choice.
module first_bit
  import dedekind_pkg::*;
(
  input  tt_t in_set,
  output tt_t out_set
);
  assign out_set = in_set & (~in_set + tt_t'(1));
endmodule
