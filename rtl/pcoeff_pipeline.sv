// pcoeff_pipeline: one accelerator pipeline. For each bottom beta it computes, for the top alpha,
//   pcoeff_sum  = sum over the 5040 permutations gamma of beta with alpha <= gamma of 2^C(alpha,gamma)
//   valid_count = number of such gamma
// where C(alpha,gamma) is the number of connected components of the graph gamma AND NOT alpha.
//
// Structure: a permutation_generator presents LANES candidates per group with their validity;
// a dispatcher hands the valid candidates of the group to the CountConnected cores, lane i being
// served by core i mod N_CORES, one candidate per ready core per cycle; when all candidates of the
// group are handed out the generator advances, otherwise the rest wait (generator stall).
// Results (one-cycle out_valid pulses from the cores) are summed as 2^count into pcoeff_sum.
// After the last group the pipeline waits until every core has finished (drain) and then offers
// the result. One bottom is processed at a time, so results leave in input order.
// The paper gives the function (all 5040 permutations per bottom, sum of their P-coefficients,
// the valid permutation count) and the cores; the lane count, the dispatcher, the one-bottom-at-
// a-time control and the widths of the sums are this design's choices.
//
// Interface: alpha stays constant while the pipeline is busy. in_valid/in_ready take one bottom
// (ready only when idle). out_valid/out_ready hand over one bottom_result_t; out_valid stays
// high until taken. idle is high when no bottom is in flight. Reset: active-low synchronous.
module pcoeff_pipeline
  import dedekind_pkg::*;
#(
  parameter int unsigned N_CORES = 30,
  parameter int unsigned K_SEQ   = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  tt_t            alpha,
  input  logic           in_valid,
  input  tt_t            in_bottom,
  output logic           in_ready,
  output logic           out_valid,
  input  logic           out_ready,
  output bottom_result_t out_result,
  output logic           idle
);
  localparam int unsigned LANES = NPERMS / factorial(K_SEQ);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_OUT} state_e;
  state_e state_q;

  // ---------------- permutation generator ----------------
  logic gen_load, gen_advance, gen_last;
  tt_t  gamma [LANES];
  logic [LANES-1:0] gen_valid;

  permutation_generator #(.K_SEQ(K_SEQ), .LANES(LANES)) u_gen (
    .clk, .rst_n, .load(gen_load), .beta(in_bottom), .alpha,
    .advance(gen_advance), .gamma, .valid(gen_valid), .last(gen_last)
  );

  // ---------------- cores ----------------
  logic               core_in_valid  [N_CORES];
  tt_t                core_graph     [N_CORES];
  logic               core_ready     [N_CORES];
  logic               core_out_valid [N_CORES];
  logic [COUNT_W-1:0] core_count     [N_CORES];

  for (genvar j = 0; j < N_CORES; j++) begin : g_core
    count_connected_core u_core (
      .clk, .rst_n, .in_valid(core_in_valid[j]), .in_graph(core_graph[j]),
      .in_ready(core_ready[j]), .out_valid(core_out_valid[j]), .out_count(core_count[j])
    );
  end

  // ---------------- dispatcher ----------------
  // Lane i is served by core i mod N_CORES; a ready core takes the lowest pending lane of its
  // own set each cycle.
  logic [LANES-1:0] pending_q, pending, dispatched, remaining;
  logic             fresh_q;
  logic             all_cores_idle;

  assign pending = (state_q != S_RUN) ? '0 : (fresh_q ? gen_valid : pending_q);

  always_comb begin
    all_cores_idle = 1'b1;
    dispatched     = '0;
    for (int j = 0; j < N_CORES; j++) begin
      if (!core_ready[j]) all_cores_idle = 1'b0;
      core_in_valid[j] = 1'b0;
      core_graph[j]    = '0;
      for (int i = j; i < LANES; i += N_CORES) begin
        if (core_ready[j] && pending[i] && !core_in_valid[j]) begin
          core_in_valid[j] = 1'b1;
          core_graph[j]    = gamma[i] & ~alpha;
          dispatched[i]    = 1'b1;
        end
      end
    end
    remaining = pending & ~dispatched;
  end

  // ---------------- accumulation ----------------
  logic [SUM_W-1:0]    sum_q, sum_inc;
  logic [VCOUNT_W-1:0] vcount_q, vcount_inc;
  always_comb begin
    sum_inc = '0;
    for (int j = 0; j < N_CORES; j++)
      if (core_out_valid[j]) sum_inc = sum_inc + (SUM_W'(1) << core_count[j]);
    vcount_inc = '0;
    for (int i = 0; i < LANES; i++) vcount_inc = vcount_inc + VCOUNT_W'(dispatched[i]);
  end

  // ---------------- control ----------------
  assign in_ready    = (state_q == S_IDLE);
  assign gen_load    = in_valid && in_ready;
  assign gen_advance = (state_q == S_RUN) && (remaining == '0) && !gen_last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      pending_q <= '0;
      fresh_q   <= 1'b0;
      sum_q     <= '0;
      vcount_q  <= '0;
    end else begin
      sum_q    <= sum_q + sum_inc;
      vcount_q <= vcount_q + vcount_inc;
      unique case (state_q)
        S_IDLE: if (gen_load) begin
          state_q  <= S_RUN;
          fresh_q  <= 1'b1;
          sum_q    <= '0;
          vcount_q <= '0;
        end
        S_RUN: begin
          if (remaining == '0) begin
            fresh_q <= 1'b1;
            if (gen_last) state_q <= S_DRAIN;
          end else begin
            fresh_q   <= 1'b0;
            pending_q <= remaining;
          end
        end
        S_DRAIN: if (all_cores_idle) state_q <= S_OUT;
        S_OUT:   if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign out_valid              = (state_q == S_OUT);
  assign out_result.pcoeff_sum  = sum_q;
  assign out_result.valid_count = vcount_q;
  assign idle                   = (state_q == S_IDLE);

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 (out_valid && !out_ready) |=> (out_valid && $stable(out_result)));
  a_dispatch_ok: assert property (@(posedge clk) disable iff (!rst_n)
                                  (dispatched & ~pending) == '0);
endmodule
