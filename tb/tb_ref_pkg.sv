// tb_ref_pkg: reference models for the accelerator testbenches, written independently of the RTL.
//
// Truth tables are 128-bit vectors indexed by 7-bit subsets. The closures are computed by direct
// subset tests, components by a breadth-first search over hypercube edges (two sets joined when
// they differ in one element), and permutations are enumerated by decoding a Lehmer code, so no
// model shares the shift-and-mask or Heap's-algorithm structure of the design.
package tb_ref_pkg;

  typedef logic [127:0] tt_t;

  function automatic tt_t ref_up(input tt_t f);
    tt_t r = '0;
    for (int x = 0; x < 128; x++)
      for (int y = 0; y < 128; y++)
        if (f[y] && ((y & ~x) == 0)) r[x] = 1'b1;
    return r;
  endfunction

  function automatic tt_t ref_down(input tt_t f);
    tt_t r = '0;
    for (int x = 0; x < 128; x++)
      for (int y = 0; y < 128; y++)
        if (f[y] && ((x & ~y) == 0)) r[x] = 1'b1;
    return r;
  endfunction

  // Connected components of the node set g, nodes joined along hypercube edges.
  function automatic int ref_components(input tt_t g);
    tt_t seen = '0;
    int  queue [128];
    int  head, tail, n, x, y;
    n = 0;
    for (int s = 0; s < 128; s++) begin
      if (g[s] && !seen[s]) begin
        n++;
        head = 0; tail = 0;
        queue[tail++] = s; seen[s] = 1'b1;
        while (head < tail) begin
          x = queue[head++];
          for (int v = 0; v < 7; v++) begin
            y = x ^ (1 << v);
            if (g[y] && !seen[y]) begin seen[y] = 1'b1; queue[tail++] = y; end
          end
        end
      end
    end
    return n;
  endfunction

  // Number of up/down flood-fill steps the core takes on graph g (cycles with work left).
  function automatic int ref_iterations(input tt_t g);
    tt_t left = g, cur, up, nw;
    int  it = 0;
    cur = '0;
    for (int x = 127; x >= 0; x--) if (g[x]) cur = tt_t'(1) << x;
    while (left != '0) begin
      it++;
      up = ref_up(cur) & left;
      nw = ref_down(up) & left;
      left = left & ~nw;
      if (up == nw || left == '0) begin
        cur = '0;
        for (int x = 127; x >= 0; x--) if (left[x]) cur = tt_t'(1) << x;
      end else cur = nw;
    end
    return it;
  endfunction

  // Permutation number idx (0..5039) of the 7 variables, from its Lehmer code.
  function automatic void ref_perm(input int idx, output int p [7]);
    int avail [7];
    int n = 7, r;
    for (int i = 0; i < 7; i++) avail[i] = i;
    for (int i = 0; i < 7; i++) begin
      r = idx % n; idx = idx / n;
      p[i] = avail[r];
      for (int t = r; t < n - 1; t++) avail[t] = avail[t+1];
      n--;
    end
  endfunction

  // Truth table f with variable i renamed to p[i].
  function automatic tt_t ref_apply(input tt_t f, input int p [7]);
    tt_t r = '0;
    int  y;
    for (int x = 0; x < 128; x++) begin
      y = 0;
      for (int i = 0; i < 7; i++) if (x[i]) y |= 1 << p[i];
      r[x] = f[y];
    end
    return r;
  endfunction

  // Per-bottom result: sum of 2^C over permutations gamma of beta above alpha, and their number.
  function automatic void ref_bottom(input tt_t alpha, input tt_t beta,
                                     output longint unsigned sum, output int count);
    int  p [7];
    tt_t g;
    sum = 0; count = 0;
    for (int k = 0; k < 5040; k++) begin
      ref_perm(k, p);
      g = ref_apply(beta, p);
      if ((alpha & ~g) == '0) begin
        count++;
        sum += longint'(1) << ref_components(g & ~alpha);
      end
    end
  endfunction

  // Random monotone function: the down-closure of n random sets of exactly `size` elements.
  function automatic tt_t rand_monotone(input int n, input int size);
    tt_t f = '0;
    int  x;
    for (int i = 0; i < n; i++) begin
      x = 0;
      while ($countones(7'(x)) < size) x |= 1 << ($urandom % 7);
      f[x] = 1'b1;
    end
    return ref_down(f);
  endfunction

endpackage
