// dedekind_pkg: types, sizes and constant functions shared by the P-coefficient accelerator.
//
// A monotone Boolean function of 7 variables is held as a 128-bit truth table: bit X (X read as a
// 7-bit subset of the variables {0..6}) is 1 when the function is true on subset X. Every block
// of the accelerator works on this representation. The widths of the graph (128) and of the
// component count (6) are the ones printed in the CountConnected core schematic; the widths of
// the per-bottom sum and of the valid permutation count are this design's choice, sized so that
// neither can overflow (5040 * 2^35 < 2^48, 5040 < 2^13).
//
// The constant functions below compute wiring at elaboration time: the index maps of a variable
// permutation and of a two-variable swap, and the factorial used to size the permutation lanes.
package dedekind_pkg;

  localparam int unsigned NVARS    = 7;             // variables of the base space (D_7)
  localparam int unsigned TT_W     = 1 << NVARS;    // 128-bit truth tables
  localparam int unsigned COUNT_W  = 6;             // connection count width
  localparam int unsigned NPERMS   = 5040;          // 7! permutations of a bottom
  localparam int unsigned SUM_W    = 48;            // sum of 2^count over 5040 permutations
  localparam int unsigned VCOUNT_W = 13;            // number of valid permutations (<= 5040)

  typedef logic [TT_W-1:0] tt_t;                    // truth table / graph bit set
  typedef int unsigned     perm_t [NVARS];          // new variable i takes old variable p[i]

  // Result of one bottom: sum over valid permutations gamma of 2^C(alpha,gamma), and the number
  // of permutations gamma with alpha <= gamma.
  typedef struct packed {
    logic [SUM_W-1:0]    pcoeff_sum;
    logic [VCOUNT_W-1:0] valid_count;
  } bottom_result_t;

  // Bits of the truth table whose subset contains variable v.
  localparam tt_t VAR_MASK [NVARS] = '{
    {64{2'b10}}, {32{4'b1100}}, {16{8'hF0}}, {8{16'hFF00}},
    {4{32'hFFFF_0000}}, {2{64'hFFFF_FFFF_0000_0000}}, {{64{1'b1}}, {64{1'b0}}}
  };

  // Exchange the roles of variables a and b (a < b) in truth table f: sets holding a but not b
  // move up by 2^b - 2^a, sets holding b but not a move down by the same amount.
  function automatic tt_t swap_vars(input tt_t f, input int unsigned a, input int unsigned b);
    tt_t ma, mb;
    int unsigned d;
    ma = VAR_MASK[a] & ~VAR_MASK[b];
    mb = VAR_MASK[b] & ~VAR_MASK[a];
    d  = (1 << b) - (1 << a);
    return (f & ~(ma | mb)) | ((f & ma) << d) | ((f & mb) >> d);
  endfunction

  function automatic int unsigned factorial(input int unsigned n);
    int unsigned f = 1;
    for (int unsigned i = 2; i <= n; i++) f = f * i;
    return f;
  endfunction

  // Coset representative number g of S_7 / S_k: positions k..6 receive an ordered choice of
  // distinct old variables (decoded from g in mixed radix), positions 0..k-1 receive the
  // remaining variables in increasing order.
  function automatic perm_t lane_perm(input int unsigned g, input int unsigned k);
    perm_t p;
    int unsigned rem [NVARS];
    int unsigned nrem = NVARS;
    int unsigned r;
    for (int unsigned i = 0; i < NVARS; i++) rem[i] = i;
    for (int unsigned j = NVARS; j > k; j--) begin
      r = g % nrem;
      g = g / nrem;
      p[j-1] = rem[r];
      for (int unsigned t = r; t + 1 < nrem; t++) rem[t] = rem[t+1];
      nrem--;
    end
    for (int unsigned i = 0; i < k; i++) p[i] = rem[i];
    return p;
  endfunction

  // Permute truth table f so that new variable i is old variable p[i]. Built as at most six
  // variable swaps (a selection sort on p); with p constant it reduces to fixed wiring.
  function automatic tt_t apply_perm(input tt_t f, input perm_t p);
    int unsigned cur [NVARS];
    int unsigned j, t;
    tt_t r = f;
    for (int unsigned i = 0; i < NVARS; i++) cur[i] = i;
    for (int unsigned i = 0; i < NVARS; i++) begin
      j = i;
      for (int unsigned k = i; k < NVARS; k++) if (cur[k] == p[i]) j = k;
      if (j != i) begin
        r = swap_vars(r, i, j);
        t = cur[i]; cur[i] = cur[j]; cur[j] = t;
      end
    end
    return r;
  endfunction

  // Index of the unordered variable pair (a, b), a < b, among the pairs of {0..k-1}.
  function automatic int unsigned pair_index(input int unsigned a, input int unsigned b);
    return b * (b - 1) / 2 + a;
  endfunction

endpackage
