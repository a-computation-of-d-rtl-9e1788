// count_connected_core: counts the connected components of one graph, one flood-fill step per
// clock (the "CountConnected Core").
//
// The graph is a set of subsets of {0..6}, one bit per subset, that is convex (for the
// accelerator it is gamma AND NOT alpha). Two nodes are joined when one contains the other, so a
// component is found by alternately closing a region upward and downward inside the graph.
//
// Registers, as in the core schematic: leftover graph (128 bits), cur exploring (128 bits) and
// the 6-bit count. Each clock:
//   up   = M-up(cur exploring)  AND leftover      -- everything above the last batch
//   nw   = M-down(up)           AND leftover      -- everything below that
//   leftover    <= leftover AND NOT nw            -- explored nodes leave the graph at once
//   inc          = (up == nw)                     -- the batch added nothing: component complete
//   cur exploring <= inc ? fst(next leftover) : nw
// Because nw is always down-closed inside the leftover graph and up catches every node above it,
// up == nw can only happen once nothing further is reachable, so each inc is one component.
// done is "leftover == 0"; in that cycle the next graph is loaded through the input multiplexer.
//
// Departures from the printed schematic, which this design adds to make the count exact:
//   * fst is taken from the next leftover value (after the explored nodes are removed, or the new
//     graph when loading), so a new seed is never a node of the component just finished;
//   * a component also counts as complete when its step empties the leftover graph (rest == 0),
//     otherwise the last component would end by "done" without an inc.
//
// Interface: in_ready (= done) says the core takes in_graph when in_valid is high. out_valid is
// high for the one cycle in which the result of the previous graph is in out_count; that is the
// same cycle in which the next graph may be taken. Timing: a graph taken in cycle t gives its
// result in cycle t + 1 + I, I being the number of flood-fill steps (cycles with leftover != 0).
// Reset: active-low synchronous, clears all registers.
module count_connected_core
  import dedekind_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  tt_t                in_graph,
  output logic               in_ready,
  output logic               out_valid,
  output logic [COUNT_W-1:0] out_count
);
  tt_t               leftover_q, cur_q;
  logic [COUNT_W-1:0] count_q;
  logic              active_q;

  tt_t  up_closed, up, down_closed, nw, rest, leftover_d, seed;
  logic done, inc;

  monotonize_up   u_mup (.in_set(cur_q), .out_set(up_closed));
  assign up = up_closed & leftover_q;
  monotonize_down u_mdn (.in_set(up), .out_set(down_closed));
  assign nw = down_closed & leftover_q;

  assign rest       = leftover_q & ~nw;
  assign done       = (leftover_q == '0);
  assign leftover_d = done ? (in_valid ? in_graph : '0) : rest;
  assign inc        = (up == nw) || (rest == '0);

  first_bit u_fst (.in_set(leftover_d), .out_set(seed));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      leftover_q <= '0;
      cur_q      <= '0;
      count_q    <= '0;
      active_q   <= 1'b0;
    end else begin
      leftover_q <= leftover_d;
      cur_q      <= (done || inc) ? seed : nw;
      count_q    <= done ? '0 : count_q + COUNT_W'(inc);
      if (done) active_q <= in_valid;
    end
  end

  assign in_ready  = done;
  assign out_valid = done && active_q;
  assign out_count = count_q;

  // At most 35 components exist on 7 variables (largest antichain), so the count never wraps.
  a_no_wrap: assert property (@(posedge clk) disable iff (!rst_n)
                              (!done && inc) |-> (count_q != '1));
endmodule
