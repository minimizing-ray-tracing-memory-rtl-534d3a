// tb_scene_pkg: builds small quantized 8-wide BVH scenes for the end-to-end
// testbenches and computes brute-force reference hits.
//
// Scene construction follows the published quantization scheme:
//  * structure: breadth-first median splits of the triangle centroids along
//    the longest axis into up to 8 children, leaves of at most LEAF_MAX
//    triangles stored contiguously (node 0 is the root);
//  * one leaf scale per axis for the whole scene, the largest that any leaf
//    needs by Eq. 1 (scale = ceil(log2(extent / 255))), so shared edges stay
//    connected; vertices are snapped to that grid;
//  * inner nodes use a scale at least as coarse as all of their children;
//  * origins are rounded down to the node's grid (Eq. 2), child bounds are
//    rounded down/up (Eq. 3, 4), triangle vertices are exact offsets in the
//    leaf grid.
// All coordinates are integers in the Q8 world grid.
package tb_scene_pkg;
  import rt_pkg::*;
  import tb_ref_pkg::*;

  class scene_t;
    int        n_tris, n_nodes;
    longint    vraw [$];             // raw vertices, tri*9 + k*3 + a
    longint    vq   [$];             // snapped vertices
    int        perm [$];             // triangle memory order
    int        ntype [$];
    int        child [$];            // node*8 + c
    int        first [$], count [$];
    longint    lo [$], hi [$];       // node*3 + a
    int        e [$];
    longint    org [$];
    int        leaf_of [$];          // triangle memory address -> leaf node
    int        leaf_e [3];
    int        leaf_max;

    function int eq1(longint ext);
      int s;
      s = -8;
      while (ext > 255 * (longint'(1) << (s + 8))) s++;
      return s;
    endfunction

    function longint fdiv(longint a, longint b);   // floor division, b > 0
      return (a >= 0) ? a / b : -((-a + b - 1) / b);
    endfunction

    function void new_node();
      ntype.push_back(0);
      for (int c = 0; c < 8; c++) child.push_back(-1);
      first.push_back(0);
      count.push_back(0);
      for (int a = 0; a < 3; a++) begin
        lo.push_back(0); hi.push_back(0); e.push_back(0); org.push_back(0);
      end
      n_nodes++;
    endfunction

    // Random triangles of edge length up to `size` units in a box of
    // sx * sy * sz world units.
    function void gen(int nt, int lmax, int sx, int sy, int sz, int size);
      n_tris = nt;
      leaf_max = lmax;
      for (int t = 0; t < nt; t++) begin
        longint c [3];
        c[0] = $urandom_range(sx * 256);
        c[1] = $urandom_range(sy * 256);
        c[2] = $urandom_range(sz * 256);
        for (int k = 0; k < 3; k++)
          for (int a = 0; a < 3; a++)
            vraw.push_back(c[a] + longint'($urandom_range(size * 256)) - size * 128);
        perm.push_back(t);
      end
    endfunction

    function longint cen(int t, int a);
      return vraw[t*9 + a] + vraw[t*9 + 3 + a] + vraw[t*9 + 6 + a];
    endfunction

    function void leaf_bounds(int n, ref longint v [$]);
      for (int a = 0; a < 3; a++) begin
        lo[n*3 + a] = 64'h7FFF_FFFF_FFFF_FFFF;
        hi[n*3 + a] = -64'sh7FFF_FFFF_FFFF_FFFF;
        for (int i = first[n]; i < first[n] + count[n]; i++)
          for (int k = 0; k < 3; k++) begin
            if (v[perm[i]*9 + k*3 + a] < lo[n*3 + a]) lo[n*3 + a] = v[perm[i]*9 + k*3 + a];
            if (v[perm[i]*9 + k*3 + a] > hi[n*3 + a]) hi[n*3 + a] = v[perm[i]*9 + k*3 + a];
          end
      end
    endfunction

    // stable bottom-up merge sort of perm[f .. f+m-1] by centroid on axis ax
    function void sort_range(int f, int m, int ax);
      int     a [], b [];
      longint k [], kb [];
      a = new[m]; b = new[m]; k = new[m]; kb = new[m];
      for (int i = 0; i < m; i++) begin
        a[i] = perm[f + i];
        k[i] = cen(a[i], ax);
      end
      for (int w = 1; w < m; w *= 2) begin
        for (int lo_i = 0; lo_i < m; lo_i += 2 * w) begin
          int i, j, o, mid, end_i;
          mid   = (lo_i + w < m) ? lo_i + w : m;
          end_i = (lo_i + 2 * w < m) ? lo_i + 2 * w : m;
          i = lo_i; j = mid; o = lo_i;
          while (i < mid || j < end_i) begin
            if (j >= end_i || (i < mid && k[i] <= k[j])) begin
              b[o] = a[i]; kb[o] = k[i]; i++;
            end else begin
              b[o] = a[j]; kb[o] = k[j]; j++;
            end
            o++;
          end
        end
        a = b; k = kb;
        b = new[m]; kb = new[m];
      end
      for (int i = 0; i < m; i++) perm[f + i] = a[i];
    endfunction

    function void build();
      int q [$];
      int ok;
      n_nodes = 0;
      new_node();
      first[0] = 0;
      count[0] = n_tris;
      q.push_back(0);
      while (q.size() > 0) begin
        int n, f, m, ax, nch, chunk;
        longint mn [3], mx [3];
        n = q.pop_front();
        f = first[n];
        m = count[n];
        if (m <= leaf_max) begin
          ntype[n] = 1;
          continue;
        end
        // longest axis of the centroids
        for (int a = 0; a < 3; a++) begin
          mn[a] = cen(perm[f], a); mx[a] = mn[a];
          for (int i = f; i < f + m; i++) begin
            if (cen(perm[i], a) < mn[a]) mn[a] = cen(perm[i], a);
            if (cen(perm[i], a) > mx[a]) mx[a] = cen(perm[i], a);
          end
        end
        ax = 0;
        if (mx[1] - mn[1] > mx[ax] - mn[ax]) ax = 1;
        if (mx[2] - mn[2] > mx[ax] - mn[ax]) ax = 2;
        sort_range(f, m, ax);
        chunk = (m + 7) / 8;
        if (chunk < 1) chunk = 1;
        nch = 0;
        for (int s = f; s < f + m; s += chunk) begin
          int cn;
          cn = n_nodes;
          new_node();
          first[cn] = s;
          count[cn] = (s + chunk <= f + m) ? chunk : f + m - s;
          child[n*8 + nch] = cn;
          nch++;
          q.push_back(cn);
        end
      end

      // one leaf scale per axis: the coarsest any leaf needs
      for (int a = 0; a < 3; a++) leaf_e[a] = -8;
      for (int n = 0; n < n_nodes; n++)
        if (ntype[n] == 1) begin
          leaf_bounds(n, vraw);
          for (int a = 0; a < 3; a++)
            if (eq1(hi[n*3 + a] - lo[n*3 + a]) > leaf_e[a]) leaf_e[a] = eq1(hi[n*3 + a] - lo[n*3 + a]);
        end
      ok = 0;
      while (!ok) begin
        ok = 1;
        vq.delete();
        for (int i = 0; i < n_tris * 9; i++)
          vq.push_back(fdiv(vraw[i], longint'(1) << (leaf_e[i % 3] + 8)) * (longint'(1) << (leaf_e[i % 3] + 8)));
        for (int n = 0; n < n_nodes; n++)
          if (ntype[n] == 1) begin
            leaf_bounds(n, vq);
            for (int a = 0; a < 3; a++)
              if (hi[n*3 + a] - lo[n*3 + a] > 255 * (longint'(1) << (leaf_e[a] + 8))) begin
                leaf_e[a]++;
                ok = 0;
              end
          end
      end
      for (int n = 0; n < n_nodes; n++)
        if (ntype[n] == 1)
          for (int a = 0; a < 3; a++) begin
            e[n*3 + a]   = leaf_e[a];
            org[n*3 + a] = lo[n*3 + a];
          end

      // inner nodes bottom-up (children have larger indices)
      for (int n = n_nodes - 1; n >= 0; n--) begin
        if (ntype[n] == 1) continue;
        for (int a = 0; a < 3; a++) begin
          lo[n*3 + a] = 64'h7FFF_FFFF_FFFF_FFFF;
          hi[n*3 + a] = -64'sh7FFF_FFFF_FFFF_FFFF;
          for (int c = 0; c < 8; c++)
            if (child[n*8 + c] >= 0) begin
              if (lo[child[n*8 + c]*3 + a] < lo[n*3 + a]) lo[n*3 + a] = lo[child[n*8 + c]*3 + a];
              if (hi[child[n*8 + c]*3 + a] > hi[n*3 + a]) hi[n*3 + a] = hi[child[n*8 + c]*3 + a];
            end
          e[n*3 + a] = eq1(hi[n*3 + a] - lo[n*3 + a]);
          for (int c = 0; c < 8; c++)
            if (child[n*8 + c] >= 0 && e[child[n*8 + c]*3 + a] > e[n*3 + a]) e[n*3 + a] = e[child[n*8 + c]*3 + a];
          forever begin
            longint g;
            g = longint'(1) << (e[n*3 + a] + 8);
            org[n*3 + a] = fdiv(lo[n*3 + a], g) * g;      // Eq. 2
            if (fdiv(hi[n*3 + a] - org[n*3 + a] + g - 1, g) <= 255) break;
            e[n*3 + a]++;
          end
        end
      end

      leaf_of.delete();
      for (int i = 0; i < n_tris; i++) leaf_of.push_back(-1);
      for (int n = 0; n < n_nodes; n++)
        if (ntype[n] == 1)
          for (int i = first[n]; i < first[n] + count[n]; i++) leaf_of[i] = n;
    endfunction

    function cnode_t node_word(int n);
      cnode_t w;
      w = '0;
      w.node_type = (ntype[n] == 1) ? NODE_LEAF : NODE_INNER;
      for (int a = 0; a < 3; a++) begin
        w.e[a]      = 8'(e[n*3 + a]);
        w.origin[a] = 32'(org[n*3 + a]);
      end
      for (int c = 0; c < 8; c++) w.child[c] = CHILD_EMPTY;
      if (ntype[n] == 1) begin
        w.child[0] = 32'(first[n]);
        w.child[1] = 32'(count[n]);
        for (int c = 2; c < 8; c++) w.child[c] = '0;
      end else begin
        for (int c = 0; c < 8; c++) begin
          int k;
          longint g, ql [3], qh [3];
          k = child[n*8 + c];
          if (k < 0) continue;
          w.child[c] = 32'(k);
          for (int a = 0; a < 3; a++) begin
            g = longint'(1) << (e[n*3 + a] + 8);
            ql[a] = fdiv(lo[k*3 + a] - org[n*3 + a], g);               // Eq. 3
            qh[a] = fdiv(hi[k*3 + a] - org[n*3 + a] + g - 1, g);       // Eq. 4
          end
          w.lo_x[c] = 8'(ql[0]); w.hi_x[c] = 8'(qh[0]);
          w.lo_y[c] = 8'(ql[1]); w.hi_y[c] = 8'(qh[1]);
          w.lo_z[c] = 8'(ql[2]); w.hi_z[c] = 8'(qh[2]);
        end
      end
      return w;
    endfunction

    // Triangle at memory address p, quantized in its leaf's grid.
    function qtri_t tri_word(int p);
      qtri_t w;
      int n;
      n = leaf_of[p];
      for (int k = 0; k < 3; k++)
        for (int a = 0; a < 3; a++)
          w.v[k][a] = 8'((vq[perm[p]*9 + k*3 + a] - org[n*3 + a]) >>> (e[n*3 + a] + 8));
      return w;
    endfunction

    // Brute force over every triangle of the scene with the reference test.
    // Returns the smallest t; `tri_ok` tells whether triangle `got_idx` hits
    // at exactly that t with barycentrics (bu, bv).
    function bit closest(int o [3], int d [3], output longint best_t,
                         input int got_idx, input int bu, input int bv, output bit tri_ok);
      bit any;
      longint t;
      int u, v;
      big_t va [3], vb [3], vc [3];
      cnode_t w;
      qtri_t tq;
      any = 0;
      best_t = 64'hFFFF_FFFF;
      tri_ok = 0;
      for (int p = 0; p < n_tris; p++) begin
        w  = node_word(leaf_of[p]);
        tq = tri_word(p);
        for (int a = 0; a < 3; a++) begin
          va[a] = world_of(w.origin[a], w.e[a], tq.v[0][a]);
          vb[a] = world_of(w.origin[a], w.e[a], tq.v[1][a]);
          vc[a] = world_of(w.origin[a], w.e[a], tq.v[2][a]);
        end
        if (tri_ref(va, vb, vc, o, d, best_t, t, u, v)) begin
          any = 1;
          best_t = t;
        end
      end
      // second pass: does the reported triangle achieve the best t?
      if (any && got_idx >= 0 && got_idx < n_tris) begin
        w  = node_word(leaf_of[got_idx]);
        tq = tri_word(got_idx);
        for (int a = 0; a < 3; a++) begin
          va[a] = world_of(w.origin[a], w.e[a], tq.v[0][a]);
          vb[a] = world_of(w.origin[a], w.e[a], tq.v[1][a]);
          vc[a] = world_of(w.origin[a], w.e[a], tq.v[2][a]);
        end
        if (tri_ref(va, vb, vc, o, d, 64'hFFFF_FFFF, t, u, v))
          tri_ok = (t == best_t) && (u == bu) && (v == bv);
      end
      return any;
    endfunction
  endclass

endpackage
