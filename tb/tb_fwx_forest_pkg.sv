// tb_fwx_forest_pkg -- reference model of a boosted forest for the BDT engine testbenches.
//
// forest_model grows random regression trees as real binary trees (node k has children
// 2k+1 and 2k+2; the comparison at a node is "x[var] > cut", true goes right), flattens
// every leaf into the per-variable bounds lo < x < hi the engine is configured with, and
// scatters the leaves over random bin slots (unused slots get an empty range). The
// expected output is obtained by walking the trees, not from the flattened bounds, so
// the check is independent of the flattening the hardware relies on.
package tb_fwx_forest_pkg;
  import fwx_pkg::*;

  class forest_model;
    int n_var, n_tree, max_depth, n_bin, n_nodes;
    int var_bits[];
    // Trees, flat [tree * n_nodes + node].
    bit is_leaf[];
    bit active[];
    int split_var[];
    int cut[];
    int leaf_val[];
    int leaf_bin[];
    // Flattened configuration, flat [(tree * n_bin + bin) * n_var + var] and [tree * n_bin + bin].
    int cfg_lo[];
    int cfg_hi[];
    int cfg_val[];
    int bins_used[];

    function new(int nv, int nt, int md, int nb, int vb[]);
      n_var = nv; n_tree = nt; max_depth = md; n_bin = nb;
      n_nodes = (1 << (md + 1)) - 1;
      var_bits = vb;
      is_leaf = new[nt * n_nodes];
      active = new[nt * n_nodes];
      split_var = new[nt * n_nodes];
      cut = new[nt * n_nodes];
      leaf_val = new[nt * n_nodes];
      leaf_bin = new[nt * n_nodes];
      cfg_lo = new[nt * nb * nv];
      cfg_hi = new[nt * nb * nv];
      cfg_val = new[nt * nb];
      bins_used = new[nt];
    endfunction

    static function int rand_range(int lo, int hi);
      if (hi <= lo) return lo;
      return lo + int'($urandom_range(0, hi - lo));
    endfunction

    static function int depth_of(int k);
      int d = 0;
      while (k > 0) begin k = (k - 1) / 2; d++; end
      return d;
    endfunction

    // Grow all trees. leaf_pct: chance (percent) that a node below the root stops early.
    // Leaf scores are drawn from [vmin, vmax].
    function void build(int leaf_pct, int vmin, int vmax);
      int rlo[], rhi[];
      int slot_of[];
      rlo = new[n_nodes * n_var];
      rhi = new[n_nodes * n_var];
      for (int t = 0; t < n_tree; t++) begin
        int nb = 0;
        int base = t * n_nodes;
        // Random bin slot for each leaf: a shuffled list of slots.
        slot_of = new[n_bin];
        for (int b = 0; b < n_bin; b++) slot_of[b] = b;
        for (int b = n_bin - 1; b > 0; b--) begin
          int j = rand_range(0, b);
          int tmp = slot_of[b]; slot_of[b] = slot_of[j]; slot_of[j] = tmp;
        end
        for (int k = 0; k < n_nodes; k++) begin
          active[base + k] = (k == 0);
          is_leaf[base + k] = 1'b0;
        end
        for (int v = 0; v < n_var; v++) begin
          rlo[v] = -1;
          rhi[v] = 1 << var_bits[v];
        end
        for (int k = 0; k < n_nodes; k++) begin
          int d;
          bit leaf;
          int cand[$];
          if (!active[base + k]) continue;
          d = depth_of(k);
          for (int v = 0; v < n_var; v++)
            if (rhi[k * n_var + v] - rlo[k * n_var + v] >= 3) cand.push_back(v);
          leaf = (d == max_depth) || (cand.size() == 0) ||
                 (d > 0 && rand_range(0, 99) < leaf_pct);
          if (leaf) begin
            int slot = slot_of[nb];
            is_leaf[base + k] = 1'b1;
            leaf_val[base + k] = rand_range(vmin, vmax);
            leaf_bin[base + k] = slot;
            for (int v = 0; v < n_var; v++) begin
              cfg_lo[(t * n_bin + slot) * n_var + v] = rlo[k * n_var + v];
              cfg_hi[(t * n_bin + slot) * n_var + v] = rhi[k * n_var + v];
            end
            cfg_val[t * n_bin + slot] = leaf_val[base + k];
            nb++;
          end else begin
            int v = cand[rand_range(0, cand.size() - 1)];
            int lo = rlo[k * n_var + v];
            int hi = rhi[k * n_var + v];
            int c = rand_range(lo + 1, hi - 2);
            split_var[base + k] = v;
            cut[base + k] = c;
            active[base + 2 * k + 1] = 1'b1;
            active[base + 2 * k + 2] = 1'b1;
            for (int u = 0; u < n_var; u++) begin
              rlo[(2 * k + 1) * n_var + u] = rlo[k * n_var + u];
              rhi[(2 * k + 1) * n_var + u] = rhi[k * n_var + u];
              rlo[(2 * k + 2) * n_var + u] = rlo[k * n_var + u];
              rhi[(2 * k + 2) * n_var + u] = rhi[k * n_var + u];
            end
            rhi[(2 * k + 1) * n_var + v] = c + 1;   // left: x <= c
            rlo[(2 * k + 2) * n_var + v] = c;       // right: x > c
          end
        end
        bins_used[t] = nb;
        // Unused slots: empty range, score 0.
        for (int b = nb; b < n_bin; b++) begin
          int slot = slot_of[b];
          for (int v = 0; v < n_var; v++) begin
            cfg_lo[(t * n_bin + slot) * n_var + v] = 1 << var_bits[v];
            cfg_hi[(t * n_bin + slot) * n_var + v] = 0;
          end
          cfg_val[t * n_bin + slot] = 0;
        end
      end
    endfunction

    // Score of one tree, by walking it.
    function int tree_score(int t, int x[]);
      int k = 0;
      int base = t * n_nodes;
      while (!is_leaf[base + k]) begin
        if (x[split_var[base + k]] > cut[base + k]) k = 2 * k + 2;
        else k = 2 * k + 1;
      end
      return leaf_val[base + k];
    endfunction

    function longint forest_sum(int x[]);
      longint s = 0;
      for (int t = 0; t < n_tree; t++) s += longint'(tree_score(t, x));
      return s;
    endfunction

    // Output of the engine: sum, plus the constant for GradBoost, limited to the range.
    static function longint limit(longint s, int out_bits, output bit sat);
      longint m = (longint'(1) << out_bits) - 1;
      sat = 1'b1;
      if (s > m) return m;
      if (s < -m) return -m;
      sat = 1'b0;
      return s;
    endfunction

    // A random input vector; with probability edge_pct percent one variable is put on,
    // or one above, the cut of a random internal node.
    function void random_x(ref int x[], input int edge_pct, output bit on_edge);
      x = new[n_var];
      for (int v = 0; v < n_var; v++) x[v] = rand_range(0, (1 << var_bits[v]) - 1);
      on_edge = 1'b0;
      if (rand_range(0, 99) < edge_pct) begin
        int t = rand_range(0, n_tree - 1);
        for (int tries = 0; tries < 20; tries++) begin
          int k = rand_range(0, n_nodes - 1);
          if (active[t * n_nodes + k] && !is_leaf[t * n_nodes + k]) begin
            x[split_var[t * n_nodes + k]] = cut[t * n_nodes + k] + rand_range(0, 1);
            on_edge = 1'b1;
            break;
          end
        end
      end
    endfunction

    // Pack a vector onto the engine's flat input bus, variable 0 in the LSBs.
    function logic [1023:0] pack_x(int x[]);
      logic [1023:0] bus = '0;
      int pos = 0;
      for (int v = 0; v < n_var; v++) begin
        for (int i = 0; i < var_bits[v]; i++) bus[pos + i] = x[v][i];
        pos += var_bits[v];
      end
      return bus;
    endfunction
  endclass

endpackage
