// drf_tb_pkg: test support for the ACAM deep-random-forest testbenches.
//
// rand_tree builds a random decision tree directly as its set of leaves:
// starting from the whole search space (every column spans 0..vmax), it
// repeatedly picks a leaf and splits its box on one column at a random
// threshold, so the leaves always partition the space and every query falls
// in exactly one leaf. Each leaf is one root-to-leaf branch, i.e. one ACAM
// row: column c matches lo..hi, which is programmed as F0 code = hi and
// F1 code = vmax - lo (full range = both FeFETs at the high threshold, the
// "don't care" state). find_leaf is the reference model: a plain interval
// test, written independently of the RTL's conduction formula.
package drf_tb_pkg;
  localparam int MAXL = 128;
  localparam int MAXC = 256;

  class rand_tree;
    int vmax;
    int n_leaves;
    int lo  [MAXL][MAXC];
    int hi  [MAXL][MAXC];
    int cls [MAXL];
    bit vld [MAXL];

    function new(int vmax_i);
      vmax = vmax_i;
      n_leaves = 0;
    endfunction

    // Split columns are drawn from [c0, c1) with probability p_a percent,
    // otherwise from [c2, c3) (used to make deeper levels test vote columns).
    function void build(int target, int ncols, int nclasses,
                        int c0, int c1, int c2, int c3, int p_a);
      int tries;
      n_leaves = 1;
      for (int c = 0; c < MAXC; c++) begin
        lo[0][c] = 0;
        hi[0][c] = (c < ncols) ? vmax : 0;
      end
      tries = 0;
      while (n_leaves < target && tries < 100000) begin
        int l, c, t;
        tries++;
        l = $urandom_range(n_leaves - 1);
        if (c3 <= c2 || $urandom_range(99) < p_a) c = c0 + $urandom_range(c1 - c0 - 1);
        else                                       c = c2 + $urandom_range(c3 - c2 - 1);
        if (hi[l][c] <= lo[l][c]) continue;
        t = lo[l][c] + $urandom_range(hi[l][c] - lo[l][c] - 1);
        for (int k = 0; k < MAXC; k++) begin
          lo[n_leaves][k] = lo[l][k];
          hi[n_leaves][k] = hi[l][k];
        end
        lo[n_leaves][c] = t + 1;
        hi[l][c] = t;
        n_leaves++;
      end
      for (int k = 0; k < MAXL; k++) begin
        cls[k] = $urandom_range(nclasses - 1);
        vld[k] = (k < n_leaves);
      end
    endfunction

    function int f0_code(int leaf, int c);
      return (leaf < n_leaves) ? hi[leaf][c] : 0;
    endfunction

    // Rows beyond n_leaves are programmed to never match (both bounds cut
    // off the whole range) in addition to being invalid in the leaf table.
    function int f1_code(int leaf, int c);
      return (leaf < n_leaves) ? vmax - lo[leaf][c] : 0;
    endfunction

    function int find_leaf(int x[MAXC], int ncols);
      for (int l = 0; l < n_leaves; l++) begin
        bit ok = 1;
        for (int c = 0; c < ncols; c++)
          if (x[c] < lo[l][c] || x[c] > hi[l][c]) ok = 0;
        if (ok) return l;
      end
      return -1;
    endfunction
  endclass
endpackage
