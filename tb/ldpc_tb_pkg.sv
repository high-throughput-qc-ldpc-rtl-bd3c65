// ldpc_tb_pkg -- reference model and stimulus helpers for the decoder testbenches.
//
// phi_ref computes the check-node function with real arithmetic, round(4 * -ln(tanh(x/8)))
// for a magnitude x in quarter units, saturated at 31, independently of the table in
// the RTL. qc_code holds a QC code as the decoder sees it: one list of (column, shift)
// per position of the scheduling sequence. It derives the read and write-back orders
// (columns shared with the previous layer read last, columns shared with the next layer
// written first, shared columns in ascending order on both sides), evaluates the
// idle-cycle count of the sequence as
//     n_idle = sum over positions p of max(t - (d_p - common(p-1, p)), 0)   (cyclic),
// and the same sum over only the pairs that share a column (a lower bound on the idle
// cycles of any pipeline that stalls only on real conflicts),
// and runs a plain sequential layered decoder with the decoder's fixed-point arithmetic
// as the reference for the SO values. schedule_search models the offline search for a
// scheduling sequence: the asymmetric travelling-salesman formulation with idle cycles as
// edge weights, optionally restricted to visit the groups of equal (degree, punctured
// connections) in ascending order, solved here by local search.
package ldpc_tb_pkg;

  function automatic int phi_ref(int x);
    real v;
    int  q;
    if (x <= 0) return 31;
    v = -$ln(((1.0 - $exp(-x / 4.0)) / (1.0 + $exp(-x / 4.0))));  // -ln tanh(x/8)
    q = $rtoi(4.0 * v + 0.5);
    return (q > 31) ? 31 : q;
  endfunction

  function automatic int sat(int v, int m);
    return (v > m) ? m : (v < -m) ? -m : v;
  endfunction

  class qc_code;
    int z, ncol, m;
    int col[][];     // [position][slot] in read order after make_orders()
    int shift[][];
    int wr_k[][];    // write slot -> read slot
    int start[];

    function new(int z_, int ncol_, int m_);
      z = z_; ncol = ncol_; m = m_;
      col = new[m]; shift = new[m]; wr_k = new[m]; start = new[m];
    endfunction

    function int deg(int p);
      return col[p].size();
    endfunction

    function bit has(int p, int c);
      foreach (col[p][i]) if (col[p][i] == c) return 1'b1;
      return 1'b0;
    endfunction

    function int common(int a, int b);
      int n = 0;
      foreach (col[b][i]) if (has(a, col[b][i])) n++;
      return n;
    endfunction

    function int edges();
      int n = 0;
      for (int p = 0; p < m; p++) n += deg(p);
      return n;
    endfunction

    // Random layer of degree d over columns 0..ncol-1, random shifts.
    function void random_layer(int p, int d);
      int c;
      col[p] = new[d]; shift[p] = new[d];
      for (int i = 0; i < d; i++) begin
        do c = $urandom_range(ncol - 1); while (has_prefix(p, i, c));
        col[p][i] = c;
        shift[p][i] = $urandom_range(z - 1);
      end
    endfunction

    function bit has_prefix(int p, int n, int c);
      for (int i = 0; i < n; i++) if (col[p][i] == c) return 1'b1;
      return 1'b0;
    endfunction

    // Sort a layer's entries into read order and derive its write order.
    function void make_orders();
      int e = 0;
      for (int p = 0; p < m; p++) begin
        int prv = (p + m - 1) % m, nxt = (p + 1) % m, d = deg(p);
        int nc[$], ns[$], wc[$];
        // read order: not shared with previous (ascending), then shared (ascending)
        for (int pass = 0; pass < 2; pass++)
          for (int c = 0; c < ncol; c++)
            for (int i = 0; i < d; i++)
              if (col[p][i] == c && (has(prv, c) == (pass == 1))) begin
                nc.push_back(c); ns.push_back(shift[p][i]);
              end
        // write order: shared with next (ascending), then the others (ascending)
        for (int pass = 0; pass < 2; pass++)
          for (int c = 0; c < ncol; c++)
            if (has(p, c) && (has(nxt, c) == (pass == 0))) wc.push_back(c);
        for (int i = 0; i < d; i++) begin col[p][i] = nc[i]; shift[p][i] = ns[i]; end
        wr_k[p] = new[d];
        for (int j = 0; j < d; j++)
          for (int i = 0; i < d; i++) if (col[p][i] == wc[j]) wr_k[p][j] = i;
        start[p] = e;
        e += d;
      end
    endfunction

    function int idle_weight(int prv, int p, int t);
      int w = t - (deg(p) - common(prv, p));
      return (w > 0) ? w : 0;
    endfunction

    // Idle cycles that a transition needs in any case: a pair of layers with no common
    // column needs none, whatever the closed form charges it.
    function int conflict_weight(int prv, int p, int t);
      return (common(prv, p) > 0) ? idle_weight(prv, p, t) : 0;
    endfunction

    function int n_conflict(int t);
      int n = 0;
      for (int p = 0; p < m; p++) n += conflict_weight((p + m - 1) % m, p, t);
      return n;
    endfunction

    function int n_idle(int t);
      int n = 0;
      for (int p = 0; p < m; p++) n += idle_weight((p + m - 1) % m, p, t);
      return n;
    endfunction

    // Sequential layered decoding with the decoder's arithmetic. so[c][r] in/out.
    function void decode(ref int so[][], input int iters);
      int c2v[][];
      c2v = new[edges()];
      foreach (c2v[e]) begin c2v[e] = new[z]; foreach (c2v[e][r]) c2v[e][r] = 0; end
      for (int it = 0; it < iters; it++)
        for (int p = 0; p < m; p++) begin
          int d = deg(p);
          int v[][];
          int s[];
          bit par[];
          v = new[d];
          s = new[z]; par = new[z];
          for (int r = 0; r < z; r++) begin s[r] = 0; par[r] = 1'b0; end
          for (int k = 0; k < d; k++) begin
            v[k] = new[z];
            for (int r = 0; r < z; r++) begin
              int a;
              v[k][r] = sat(so[col[p][k]][(r + shift[p][k]) % z] - c2v[start[p] + k][r], 127);
              a = (v[k][r] < 0) ? -v[k][r] : v[k][r];
              s[r] += phi_ref((a > 31) ? 31 : a);
              par[r] = par[r] ^ (v[k][r] < 0);
            end
          end
          for (int k = 0; k < d; k++)
            for (int r = 0; r < z; r++) begin
              int a, x, mg, c;
              a  = (v[k][r] < 0) ? -v[k][r] : v[k][r];
              x  = s[r] - phi_ref((a > 31) ? 31 : a);
              mg = phi_ref((x > 31) ? 31 : x);
              c  = (par[r] ^ (v[k][r] < 0)) ? -mg : mg;
              c2v[start[p] + k][r] = c;
              so[col[p][k]][(r + shift[p][k]) % z] = sat(v[k][r] + c, 127);
            end
        end
    endfunction
    // Copy of this code with its layers visited in the order ord (layer indices).
    function qc_code permuted(int ord[]);
      qc_code c;
      c = new(z, ncol, m);
      for (int p = 0; p < m; p++) begin
        c.col[p] = col[ord[p]];
        c.shift[p] = shift[ord[p]];
      end
      return c;
    endfunction

    // Connections of layer p to the punctured columns 0 and 1.
    function int n_punct(int p);
      return int'(has(p, 0)) + int'(has(p, 1));
    endfunction
  endclass

  // ---- scheduling-sequence search (software model of the offline step) -------------
  // The layers are the nodes of a complete directed graph; the edge a -> b weighs the
  // idle cycles b needs after a. For the performance-aware policy the layers are grouped
  // by (degree, punctured connections), the groups are labelled 0 .. P-1 in ascending
  // order, an edge is allowed only within a group or into the next group, and edges from
  // the last group into the first carry an extra weight H. A tour of least weight is
  // searched by local search (moving one layer to another place) from several starts.
  localparam int TSP_INF = 1000000, TSP_H = 10000;

  class schedule_search;
    int m, n_grp;
    int w[][];     // idle cycles a -> b
    int grp[];     // group label per layer
    bit constrained;

    function new(qc_code c, int t, bit constrained_);
      int key[];
      int keys[$];
      m = c.m; constrained = constrained_;
      w = new[m];
      for (int a = 0; a < m; a++) begin
        w[a] = new[m];
        for (int b = 0; b < m; b++) w[a][b] = (a == b) ? 0 : c.idle_weight(a, b, t);
      end
      key = new[m];
      for (int p = 0; p < m; p++) begin
        bit seen;
        key[p] = c.deg(p) * 4 + c.n_punct(p);
        seen = 1'b0;
        foreach (keys[i]) if (keys[i] == key[p]) seen = 1'b1;
        if (!seen) keys.push_back(key[p]);
      end
      keys.sort();
      n_grp = keys.size();
      grp = new[m];
      for (int p = 0; p < m; p++)
        foreach (keys[i]) if (keys[i] == key[p]) grp[p] = i;
    endfunction

    function int arc(int a, int b);
      int e;
      e = w[a][b];
      if (constrained && grp[b] != grp[a] && grp[b] != grp[a] + 1) begin
        if (grp[a] == n_grp - 1 && grp[b] == 0) e += TSP_H;
        else e += TSP_INF;
      end
      return e;
    endfunction

    function int cost(int ord[]);
      int s = 0;
      for (int i = 0; i < m; i++) s += arc(ord[(i + m - 1) % m], ord[i]);
      return s;
    endfunction

    // Idle cycles of the cyclic sequence, without the search's extra weights.
    function int idle(int ord[]);
      int s = 0;
      for (int i = 0; i < m; i++) s += w[ord[(i + m - 1) % m]][ord[i]];
      return s;
    endfunction

    // Layers sorted by group label (stable): a valid tour of the constrained graph.
    function void sorted(ref int ord[]);
      int n = 0;
      ord = new[m];
      for (int g = 0; g < n_grp; g++)
        for (int p = 0; p < m; p++) if (grp[p] == g) ord[n++] = p;
    endfunction

    // Move one layer from position i to position j while that lowers the cost.
    function void improve(ref int ord[]);
      bit better;
      int best, c, tmp[];
      best = cost(ord);
      do begin
        better = 1'b0;
        for (int i = 0; i < m; i++)
          for (int j = 0; j < m; j++) begin
            if (i == j) continue;
            tmp = ord;
            if (i < j) begin
              for (int k = i; k < j; k++) tmp[k] = ord[k + 1];
            end else begin
              for (int k = i; k > j; k--) tmp[k] = ord[k - 1];
            end
            tmp[j] = ord[i];
            c = cost(tmp);
            if (c < best) begin best = c; ord = tmp; better = 1'b1; end
          end
      end while (better);
    endfunction

    // Best tour from the given start and from n_starts shuffled ones. Shuffles keep the
    // layers of a group together when the graph is constrained.
    function void search(ref int ord[], input int n_starts);
      int cur[], best[];
      best = ord;
      improve(best);
      for (int s = 0; s < n_starts; s++) begin
        cur = ord;
        for (int i = m - 1; i > 0; i--) begin
          int j, x;
          j = $urandom_range(i);
          if (!constrained || grp[cur[i]] == grp[cur[j]]) begin
            x = cur[i]; cur[i] = cur[j]; cur[j] = x;
          end
        end
        improve(cur);
        if (cost(cur) < cost(best)) best = cur;
      end
      ord = best;
      // start the sequence after the edge from the last group into the first
      if (constrained)
        for (int i = 0; i < m; i++)
          if (grp[ord[i]] == 0 && grp[ord[(i + m - 1) % m]] == n_grp - 1) begin
            int r[];
            r = new[m];
            for (int k = 0; k < m; k++) r[k] = ord[(i + k) % m];
            ord = r;
            break;
          end
    endfunction
  endclass

endpackage
