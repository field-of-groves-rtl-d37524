// fog_model_pkg: reference model of Field of Groves classification used by the
// testbenches. It keeps its own copy of every tree (node offsets, weights and
// leaf probability vectors) and reproduces the classification with plain
// integer arithmetic:
//   tree     walk from the root; go to child 2i+2 when x > w, else 2i+1
//   grove    g[c] = (sum over trees of leaf[c]) / trees
//   combine  p[c] = (p[c] * hops + g[c]) / (hops + 1), hops = groves so far
//   decide   stop when max1 - max2 >= thresh or hops >= max_hops
package fog_model_pkg;
  import fog_pkg::*;

  localparam int unsigned NN = (1 << TREE_DEPTH) - 1;
  localparam int unsigned NL = 1 << TREE_DEPTH;

  int unsigned m_off  [N_GROVES][TREES_PER_GROVE][NN];
  int unsigned m_w    [N_GROVES][TREES_PER_GROVE][NN];
  int unsigned m_leaf [N_GROVES][TREES_PER_GROVE][NL][MAX_CLASSES];

  typedef int unsigned vec_t [MAX_CLASSES];
  typedef byte unsigned feat_t [MAX_FEATURES];

  // leaf index reached by tree t of grove g
  function automatic int unsigned leaf_of(int unsigned g, int unsigned t, input feat_t x);
    int unsigned n = 0;
    for (int d = 0; d < TREE_DEPTH; d++)
      n = (x[m_off[g][t][n]] > m_w[g][t][n]) ? 2 * n + 2 : 2 * n + 1;
    return n - NN;
  endfunction

  // one grove processes x: p (mean of hops groves) becomes the mean of hops+1
  function automatic void grove_step(int unsigned g, input feat_t x, int unsigned n_classes,
                                     input vec_t p_in, input int unsigned hops, output vec_t p);
    p = p_in;
    for (int c = 0; c < MAX_CLASSES; c++) begin
      int unsigned s = 0;
      for (int t = 0; t < TREES_PER_GROVE; t++) s += m_leaf[g][t][leaf_of(g, t, x)][c];
      s = s / TREES_PER_GROVE;
      p[c] = (c < n_classes) ? (p[c] * hops + s) / (hops + 1) : 0;
    end
  endfunction

  function automatic void maxdiff(input vec_t p, input int unsigned n_classes,
                                  output int unsigned conf, output int unsigned label);
    int unsigned m1 = 0, m2 = 0;
    label = 0;
    for (int c = 0; c < n_classes; c++) begin
      if (c == 0 || p[c] > m1) begin
        if (c != 0) m2 = m1;
        m1 = p[c];
        label = c;
      end else if (p[c] > m2) m2 = p[c];
    end
    conf = m1 - m2;
  endfunction

  // whole classification starting at grove s; returns hops used
  function automatic int unsigned classify(int unsigned s, input feat_t x,
      int unsigned n_classes, int unsigned thresh, int unsigned max_hops,
      output vec_t p, output int unsigned conf, output int unsigned label);
    int unsigned h = 0;
    for (int c = 0; c < MAX_CLASSES; c++) p[c] = 0;
    forever begin
      grove_step((s + h) % N_GROVES, x, n_classes, p, h, p);
      h++;
      maxdiff(p, n_classes, conf, label);
      if (conf >= thresh || h >= max_hops) return h;
    end
  endfunction
endpackage
