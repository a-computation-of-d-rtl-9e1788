// monotonize_up: up-closure (the "M-up" block of the CountConnected core).
//
// Output bit X is 1 when input bit Y is 1 for some subset Y of X, i.e. the result is the set of
// all supersets of the input sets. It is built as NVARS stages of shift-and-OR: stage v copies
// every set without variable v onto the same set with v added. Purely combinational, no clock.
// The paper names the block; the stage structure is this design's choice.
module monotonize_up
  import dedekind_pkg::*;
(
  input  tt_t in_set,
  output tt_t out_set
);
  always_comb begin
    out_set = in_set;
    for (int unsigned v = 0; v < NVARS; v++)
      out_set = out_set | ((out_set << (1 << v)) & VAR_MASK[v]);
  end
endmodule
