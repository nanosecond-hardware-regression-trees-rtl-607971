// ddte_ref_pkg -- reference model used by the testbenches.
//
// Evaluates the forest of ddte_pkg the classic way, walking each tree from the
// root and comparing one variable per node (x[v] < cut goes left), and adds
// the leaf scores as plain integers.  The RTL never walks a tree: it tests
// every bin's box in parallel and sums in hardware widths, so agreement checks
// the box derivation, the one-hot decision paths, the look-ups and the adder
// tree against an independent route through the same model.
package ddte_ref_pkg;
  import ddte_pkg::*;

  typedef longint vec_t [MAX_VAR];

  // Index of the bin of tree `tree` that holds x.
  function automatic int find_leaf(int unsigned seed, int unsigned tree,
                                   int unsigned nvar, int unsigned nbit,
                                   int unsigned nbin, int unsigned depth,
                                   vec_t x);
    box_t bx;
    split_t s;
    int n, r, base;
    int unsigned level, path;
    bx = root_box(nbit);
    n = int'(nbin); r = int'(depth); base = 0; level = 0; path = 0;
    while (n > 1) begin
      s = node_split(seed, tree, level, path, n, r, bx, nvar);
      if (x[s.var_idx] < s.cut) begin
        bx[s.var_idx].hi = s.cut;
        n = s.nleft;
        path = path << 1;
      end else begin
        bx[s.var_idx].lo = s.cut - 1;
        base = base + s.nleft;
        n = n - s.nleft;
        path = (path << 1) | 1;
      end
      level++;
      r--;
    end
    return base;
  endfunction

  // Forest score: sum of the pre-divided leaf scores of all trees.
  function automatic int forest_score(int unsigned seed, int unsigned ntree,
                                      int unsigned nvar, int unsigned nbit,
                                      int unsigned nbin, int unsigned depth,
                                      int unsigned score_w, vec_t x);
    int acc;
    acc = 0;
    for (int unsigned t = 0; t < ntree; t++)
      acc += leaf_score(seed, t, find_leaf(seed, t, nvar, nbit, nbin, depth, x),
                        ntree, score_w);
    return acc;
  endfunction

  // Uniform random value of a signed nbit-bit variable.
  function automatic longint rand_val(int unsigned nbit);
    longint unsigned r;
    r = {$urandom, $urandom} & ((64'd1 << nbit) - 1);
    return (r >= (64'd1 << (nbit - 1))) ? longint'(r) - (64'sd1 <<< nbit) : longint'(r);
  endfunction

  // Random value inside strict bounds (lo, hi).
  function automatic longint rand_in(bound_t bd);
    longint unsigned r;
    r = {$urandom, $urandom} >> 1;
    return bd.lo + 1 + longint'(r % longint'(bd.hi - bd.lo - 1));
  endfunction

endpackage
