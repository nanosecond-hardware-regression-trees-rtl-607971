// ddte_pkg -- shared types, default sizes and the forest model of the
// Deep Decision Tree Engine (DDTE).
//
// The engine evaluates a boosted regression forest by checking, for every
// terminal bin of every tree, whether the input vector lies inside the bin's
// hyper-rectangle (x_min < x < x_max on every variable).  The cut values and
// bin scores come from an offline training, and in the original flow they are
// written into the HDL as constants.  The trained values are not published,
// so this package computes a stand-in forest at elaboration time: a fixed,
// seeded pseudo-random forest with the published sizes (trees, maximum depth,
// bins per tree, variables, bit width).  To run a real model, replace
// node_split() and leaf_score() with functions (or tables) that return the
// trained cuts and scores; nothing else in the RTL depends on how they are made.
//
// Forest model.  A tree with n terminal bins and remaining depth r is split at
// its root into a left subtree of n_left bins and a right subtree of
// n - n_left bins, each no larger than 2**(r-1); the node compares one
// variable v against a cut c and sends x[v] < c to the left.  Bins are
// numbered left to right.  Every decision (n_left, v, c) is a hash of the
// seed, the tree index and the node's position, so any bin's box can be
// worked out in O(depth) steps without building the whole tree.
//
// Bounds are strict, as in the paper: a bin (lo, hi) holds lo < x < hi, so
// the bounds need one bit more than the signed NBIT-bit inputs.  A split at c
// gives a left child (lo, c) and a right child (c-1, hi).
//
// Choices of this design, not from the paper: signed two's complement inputs,
// equal bin counts for all trees, the hash-based stand-in forest, and
// subscores of SCORE_W signed bits pre-divided by the number of trees.
// Inputs may be up to MAX_BIT bits wide (the paper scans 8 to 35 bits).
package ddte_pkg;

  // ---- defaults: configuration (3) of the paper, the one in its abstract --
  localparam int unsigned NVAR_DEF    = 8;    // input variables
  localparam int unsigned NBIT_DEF    = 16;   // bits per input variable
  localparam int unsigned NTREE_DEF   = 20;   // trees in the forest
  localparam int unsigned DEPTH_DEF   = 10;   // maximum tree depth D
  localparam int unsigned NBIN_DEF    = 145;  // bins per tree: 2.9k bins / 20 trees
  localparam int unsigned SCORE_W_DEF = 16;   // subscore width (assumed)
  localparam int unsigned SEED_DEF    = 32'h5eed_2024;

  // ---- storage limits of the model types ---------------------------------
  localparam int unsigned MAX_VAR = 8;
  localparam int unsigned MAX_BIN = 1024;
  localparam int unsigned MAX_BIT = 62;   // bounds are 64-bit signed

  // Sum engine variants of the Tree Manager (paper appendix A).
  typedef enum logic {
    SUM_PIPELINE = 1'b0,  // flip-flops before every adder level
    SUM_COMB     = 1'b1   // one combinational adder tree
  } sum_mode_e;

  // Strict bounds of one variable of one bin: lo < x < hi.
  typedef struct packed {
    longint lo;
    longint hi;
  } bound_t;

  // Box of one bin: bounds for up to MAX_VAR variables (index = variable).
  typedef bound_t [MAX_VAR-1:0] box_t;

  // Decision of one internal node.
  typedef struct packed {
    int     nleft;    // bins in the left subtree
    int     var_idx;  // variable compared
    longint cut;      // x[var_idx] < cut goes left
  } split_t;

  // ---- hashing -------------------------------------------------------------
  function automatic int unsigned mix32(int unsigned a);
    a = a ^ (a >> 16);
    a = a * 32'h7feb_352d;
    a = a ^ (a >> 15);
    a = a * 32'h846c_a68b;
    a = a ^ (a >> 16);
    return a;
  endfunction

  function automatic int unsigned hash5(int unsigned seed, int unsigned tree,
                                        int unsigned level, int unsigned path,
                                        int unsigned salt);
    int unsigned h;
    h = mix32(seed ^ 32'h9e37_79b9);
    h = mix32(h ^ (tree  * 32'h85eb_ca6b));
    h = mix32(h ^ (level * 32'hc2b2_ae35) ^ salt);
    h = mix32(h ^ path);
    return h;
  endfunction

  // ---- box helpers ---------------------------------------------------------
  // Box covering every value of a signed nbit-bit input.
  function automatic box_t root_box(int unsigned nbit);
    box_t b;
    for (int v = 0; v < MAX_VAR; v++) begin
      b[v].lo = -(64'sd1 <<< (nbit - 1)) - 1;
      b[v].hi =  (64'sd1 <<< (nbit - 1));
    end
    return b;
  endfunction

  // Number of integer values inside the strict bounds.
  function automatic longint box_width(bound_t bd);
    return bd.hi - bd.lo - 1;
  endfunction

  // ---- the forest model ----------------------------------------------------
  // Decision of the node reached by `path` (level bits, MSB first) that holds
  // n > 1 bins with r levels left below it and covers box bx.
  function automatic split_t node_split(int unsigned seed, int unsigned tree,
                                        int unsigned level, int unsigned path,
                                        int n, int r, box_t bx,
                                        int unsigned nvar);
    split_t s;
    int cap, lo_b, hi_b, v;
    longint w, off;
    int unsigned h1, h2, h3;
    h1 = hash5(seed, tree, level, path, 1);
    h2 = hash5(seed, tree, level, path, 2);
    h3 = hash5(seed, tree, level, path, 3);
    // share of the bins: each side must fit in a subtree of depth r-1
    cap  = (r >= 31) ? 32'h4000_0000 : (1 << (r - 1));
    lo_b = (n - cap > 1) ? (n - cap) : 1;
    hi_b = (n - 1 < cap) ? (n - 1) : cap;
    s.nleft = lo_b + int'(h1 % unsigned'(hi_b - lo_b + 1));
    // variable: hashed, or the widest one if the hashed one is nearly used up
    v = int'(h2 % nvar);
    if (box_width(bx[v]) < 4) begin
      for (int i = 0; i < int'(nvar); i++)
        if (box_width(bx[i]) > box_width(bx[v])) v = i;
    end
    s.var_idx = v;
    // cut: inside the middle half of the box, both sides non-empty
    w = box_width(bx[v]);
    if (w >= 8)      off = w / 4 + longint'(h3) % (w / 2);
    else if (w >= 2) off = 1 + longint'(h3) % (w - 1);
    else             off = 1;
    s.cut = bx[v].lo + 1 + off;
    return s;
  endfunction

  // Box (x_min, x_max per variable) of bin `bin` of tree `tree`.
  function automatic box_t bin_box(int unsigned seed, int unsigned tree,
                                   int unsigned bin, int unsigned nvar,
                                   int unsigned nbit, int unsigned nbin,
                                   int unsigned depth);
    box_t bx;
    split_t s;
    int n, r, b;
    int unsigned level, path;
    bx = root_box(nbit);
    n = int'(nbin); r = int'(depth); b = int'(bin);
    level = 0; path = 0;
    while (n > 1) begin
      s = node_split(seed, tree, level, path, n, r, bx, nvar);
      if (b < s.nleft) begin
        bx[s.var_idx].hi = s.cut;
        n = s.nleft;
        path = path << 1;
      end else begin
        bx[s.var_idx].lo = s.cut - 1;
        b = b - s.nleft;
        n = n - s.nleft;
        path = (path << 1) | 1;
      end
      level++;
      r--;
    end
    return bx;
  endfunction

  // Subscore of one bin, already divided by the number of trees so that the
  // plain sum of the subscores is the forest average.
  function automatic int leaf_score(int unsigned seed, int unsigned tree,
                                    int unsigned bin, int unsigned ntree,
                                    int unsigned score_w);
    int unsigned h;
    int raw;
    h = hash5(seed, tree, 32'hffff, bin, 7);
    raw = int'(h & ((32'd1 << score_w) - 1));
    if (raw >= (1 <<< (score_w - 1))) raw = raw - (1 <<< score_w);
    return raw / int'(ntree);
  endfunction

  // Width of the final score: one extra bit per adder level.
  function automatic int unsigned sum_width(int unsigned score_w, int unsigned ntree);
    return score_w + ((ntree > 1) ? $clog2(ntree) : 0);
  endfunction

  // Algorithm latency in clock ticks (paper appendix A): 2 for the
  // combinational adder, 2 + ceil(log2 T) for the pipelined one.
  function automatic int unsigned latency(sum_mode_e mode, int unsigned ntree);
    return (mode == SUM_COMB) ? 2 : 2 + ((ntree > 1) ? $clog2(ntree) : 0);
  endfunction

endpackage
