// tb_cloud_pkg -- testbench model of the host side of HgPCN.
//
// It plays the octree-build software: it generates a random point cloud
// directly in space-filling-curve order (sorted leaf m-codes, 1..maxpp
// points per leaf voxel), stores it as the host memory image `pts` (the
// feature word of each point holds its own address so results can be
// traced), and builds the Octree-Table image `nodes`: root at index 0, then
// every level in curve order, so the children of a node are consecutive.
//
// It also holds golden models written straight from the algorithm
// descriptions: farthest-point sampling on the octree (ois_ref) and
// voxel-expanded k-nearest-neighbour gathering computed by bucketing the
// points themselves (veg_ref), independent of the table.
package tb_cloud_pkg;
  import hgpcn_pkg::*;

  point_t      pts[$];
  node_t       nodes[$];
  int unsigned leaf_code[$];      // leaf m-codes, curve order

  // ---------------- cloud and octree ----------------
  // n_leaves leaf voxels, codes advancing by 1..gap, 1..maxpp points each.
  // `span` limits the first leaf code (keeps clouds compact when small).
  function automatic void build(int n_leaves, int maxpp, int gap, int unsigned start_code);
    int unsigned code;
    int unsigned lp[DEPTH+1][$];
    int unsigned lf[DEPTH+1][$];
    int unsigned lc[DEPTH+1][$];
    int unsigned lstart[DEPTH+2];
    int unsigned leaf_first[$], leaf_cnt[$];
    pts.delete(); nodes.delete(); leaf_code.delete();
    code = start_code;
    for (int i = 0; i < n_leaves; i++) begin
      int np;
      np = 1 + int'($urandom % maxpp);
      leaf_code.push_back(code);
      leaf_first.push_back(pts.size());
      leaf_cnt.push_back(np);
      for (int p = 0; p < np; p++) begin
        point_t pt;
        mcode_t m;
        m = mcode_t'(code);
        pt.x = {morton_axis(m, 0), (COORD_W-DEPTH)'($urandom)};
        pt.y = {morton_axis(m, 1), (COORD_W-DEPTH)'($urandom)};
        pt.z = {morton_axis(m, 2), (COORD_W-DEPTH)'($urandom)};
        pt.f = FEAT_W'(pts.size());
        pts.push_back(pt);
      end
      code = code + 1 + ($urandom % gap);
      if (code >= (1 << MCODE_W)) break;
    end
    // distinct prefixes per level, with point ranges
    for (int l = 0; l <= DEPTH; l++)
      for (int i = 0; i < leaf_code.size(); i++) begin
        int unsigned pre;
        pre = leaf_code[i] >> (3 * (DEPTH - l));
        if (lp[l].size() == 0 || lp[l][lp[l].size()-1] != pre) begin
          lp[l].push_back(pre); lf[l].push_back(leaf_first[i]); lc[l].push_back(leaf_cnt[i]);
        end else begin
          int last;
          last = lc[l].size() - 1;
          lc[l][last] = lc[l][last] + leaf_cnt[i];
        end
      end
    lstart[0] = 0;
    for (int l = 0; l <= DEPTH; l++) lstart[l+1] = lstart[l] + lp[l].size();
    for (int l = 0; l <= DEPTH; l++) begin
      int j;
      j = 0;
      for (int k = 0; k < lp[l].size(); k++) begin
        node_t n;
        n = '0;
        n.s.mcode   = mcode_t'(lp[l][k] << (3 * (DEPTH - l)));
        n.s.is_leaf = (l == DEPTH);
        n.s.pt_addr = paddr_t'(lf[l][k]);
        n.s.pt_cnt  = cnt_t'(lc[l][k]);
        n.d.pts_left = cnt_t'(lc[l][k]);
        if (l < DEPTH) begin
          int j0;
          while (j < lp[l+1].size() && (lp[l+1][j] >> 3) < lp[l][k]) j++;
          j0 = j;
          while (j < lp[l+1].size() && (lp[l+1][j] >> 3) == lp[l][k]) j++;
          n.s.child_base = node_idx_t'(lstart[l+1] + j0);
          n.s.child_num  = 4'(j - j0);
        end
        nodes.push_back(n);
      end
    end
  endfunction

  function automatic int popc(mcode_t v);
    return $countones(v);
  endfunction

  // ---------------- golden OIS ----------------
  // Returns the picked host addresses.  Follows the walk rules of the
  // down-sampling unit: round 0 follows the seed, later rounds the farthest
  // child (ties to the higher index), leaf point from the curve end away
  // from the seed, seed = rounded centroid of the picked leaf voxels.
  function automatic void ois_ref(int k, mcode_t seed0, ref int unsigned picked[$]);
    node_t t[$];
    mcode_t seed;
    longint sx, sy, sz;
    t = nodes;
    seed = seed0;
    sx = 0; sy = 0; sz = 0;
    picked.delete();
    for (int it = 0; it < k; it++) begin
      int cur, lvl;
      if (t[0].d.pts_left == 0) break;
      t[0].d.pts_left--;
      cur = 0; lvl = 1;
      forever begin
        int best, bscore;
        best = -1; bscore = -1;
        for (int j = 0; j < t[cur].s.child_num; j++) begin
          int c, hd, sc;
          c = int'(t[cur].s.child_base) + j;
          if (t[c].d.pts_left == 0) continue;
          hd = popc((t[c].s.mcode ^ seed) & level_mask(LEVEL_W'(lvl)));
          sc = (it == 0) ? MCODE_W - hd : hd;
          if (sc >= bscore) begin bscore = sc; best = c; end
        end
        t[best].d.pts_left--;
        if (t[best].s.is_leaf) begin
          int unsigned a;
          if (it != 0 && t[best].s.mcode >= seed)
            a = int'(t[best].s.pt_addr) + int'(t[best].d.lo_off) + int'(t[best].d.pts_left);  // already decremented
          else begin
            a = int'(t[best].s.pt_addr) + int'(t[best].d.lo_off);
            t[best].d.lo_off++;
          end
          picked.push_back(a);
          sx += longint'(morton_axis(t[best].s.mcode, 0));
          sy += longint'(morton_axis(t[best].s.mcode, 1));
          sz += longint'(morton_axis(t[best].s.mcode, 2));
          begin
            longint n;
            n = longint'(picked.size());
            seed = morton_encode(vcoord_t'((sx + n/2) / n), vcoord_t'((sy + n/2) / n),
                                 vcoord_t'((sz + n/2) / n));
          end
          break;
        end
        cur = best; lvl++;
      end
    end
  endfunction

  // ---------------- golden VEG ----------------
  function automatic longint sqd(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x);
    dy = longint'(a.y) - longint'(b.y);
    dz = longint'(a.z) - longint'(b.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  function automatic int ring_of(point_t p, point_t c, int lvl);
    int sh, a, b, m;
    sh = COORD_W - lvl;
    m = 0;
    a = int'(32'(p.x) >> sh); b = int'(32'(c.x) >> sh); if ((a > b ? a - b : b - a) > m) m = (a > b ? a - b : b - a);
    a = int'(32'(p.y) >> sh); b = int'(32'(c.y) >> sh); if ((a > b ? a - b : b - a) > m) m = (a > b ? a - b : b - a);
    a = int'(32'(p.z) >> sh); b = int'(32'(c.z) >> sh); if ((a > b ? a - b : b - a) > m) m = (a > b ? a - b : b - a);
    return m;
  endfunction

  // must[]: addresses that have to be in the subset (rings < n);
  // dists[]: sorted squared distances of the whole expected subset;
  // returns the expected subset size, n_out = rings expanded.
  function automatic int veg_ref(point_t c, int lvl, int knn, int rmax,
                                 ref int unsigned must[$], ref longint dists[$], output int n_out);
    int cum, n;
    longint last[$];
    must.delete(); dists.delete();
    cum = 0; n = rmax;
    for (int r = 0; r <= rmax; r++) begin
      foreach (pts[i]) if (ring_of(pts[i], c, lvl) == r) cum++;
      if (cum >= knn) begin n = r; break; end
    end
    foreach (pts[i]) begin
      int rg;
      rg = ring_of(pts[i], c, lvl);
      if (rg < n) begin must.push_back(i); dists.push_back(sqd(pts[i], c)); end
      else if (rg == n) last.push_back(sqd(pts[i], c));
    end
    last.sort();
    for (int i = 0; i < last.size() && dists.size() < knn; i++) dists.push_back(last[i]);
    dists.sort();
    n_out = n;
    return dists.size();
  endfunction
endpackage
