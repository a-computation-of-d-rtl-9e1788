// permutation_generator: produces the 5040 variable permutations gamma of one bottom beta and
// marks those that lie above the top alpha (alpha <= gamma, the only ones with a P-coefficient).
//
// The 7! permutations are split as S_7 = (coset representatives) x S_K. LANES = 7!/K! lanes each
// hold beta permuted by a fixed representative (fixed wiring: lane_perm picks the representative
// at elaboration, apply_perm realises it as variable swaps); all lanes then walk through the K!
// permutations of variables 0..K-1 together using Heap's algorithm, which needs one swap of two variables per step. The swap to apply is decided
// once for all lanes from a factorial-base counter c[1..K-1]: the lowest digit i with c[i] < i
// is incremented and the lower digits cleared; the swap is (0,i) for even i, (c[i],i) for odd i.
// So a bottom takes K! groups of LANES candidates. The paper states only that all 5040
// permutations of each bottom are computed; the lane/Heap structure is this design's choice.
//
// Interface: load (one cycle) takes beta and shows group 0 in the next cycle. advance moves to
// the next group (ignored after the last). gamma[] and valid[] describe the current group; last
// is high while the current group is the final one. alpha must be held stable.
module permutation_generator
  import dedekind_pkg::*;
#(
  parameter int unsigned K_SEQ = 4,                                // variables permuted in time
  parameter int unsigned LANES = NPERMS / factorial(K_SEQ)         // candidates per group
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  tt_t  beta,
  input  tt_t  alpha,
  input  logic advance,
  output tt_t  gamma [LANES],
  output logic [LANES-1:0] valid,
  output logic last
);
  localparam int unsigned NPAIRS = (K_SEQ * (K_SEQ - 1)) / 2;
  localparam int unsigned NSTEPS = factorial(K_SEQ);
  localparam int unsigned STEP_W = $clog2(NSTEPS + 1);

  initial assert (LANES * NSTEPS == NPERMS) else $error("LANES * K_SEQ! must be 5040");

  tt_t  gamma_q [LANES];
  logic [3:0] c_q [K_SEQ];                   // Heap counter digits c[1..K-1] (c[0] unused)
  logic [STEP_W-1:0] step_q;

  // Select the next swap from the counter.
  logic [3:0] digit;
  logic [NPAIRS-1:0] pair_sel;
  logic [3:0] c_d [K_SEQ];
  always_comb begin
    int unsigned a, b;
    digit = 4'd0;
    for (int i = K_SEQ - 1; i >= 1; i--) if (c_q[i] < 4'(i)) digit = 4'(i);
    c_d = c_q;
    for (int i = 1; i < K_SEQ; i++) begin
      if (4'(i) < digit) c_d[i] = '0;
      else if (4'(i) == digit) c_d[i] = c_q[i] + 4'd1;
    end
    b = 32'(digit);
    a = digit[0] ? 32'(c_q[b]) : 0;
    pair_sel = '0;
    if (digit != 0) pair_sel[pair_index(a, b)] = 1'b1;
  end

  assign last = (step_q == STEP_W'(NSTEPS - 1));

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    localparam perm_t P = lane_perm(g, K_SEQ);
    tt_t base, swapped [NPAIRS], next;
    assign base = apply_perm(beta, P);
    for (genvar b = 1; b < K_SEQ; b++) begin : g_b
      for (genvar a = 0; a < b; a++) begin : g_a
        assign swapped[pair_index(a, b)] = swap_vars(gamma_q[g], a, b);
      end
    end
    always_comb begin
      next = gamma_q[g];
      for (int unsigned p = 0; p < NPAIRS; p++) if (pair_sel[p]) next = swapped[p];
    end
    always_ff @(posedge clk) begin
      if (!rst_n)                gamma_q[g] <= '0;
      else if (load)             gamma_q[g] <= base;
      else if (advance && !last) gamma_q[g] <= next;
    end
    assign gamma[g] = gamma_q[g];
    assign valid[g] = ((alpha & ~gamma_q[g]) == '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || load) begin
      step_q <= '0;
      for (int i = 0; i < K_SEQ; i++) c_q[i] <= '0;
    end else if (advance && !last) begin
      step_q <= step_q + 1'b1;
      c_q    <= c_d;
    end
  end
endmodule
