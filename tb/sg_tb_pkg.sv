// sg_tb_pkg -- testbench helpers: random kd-tree chunks and reference models.
//
// gen_tree builds a random but valid kd-tree in heap order: each node draws
// its point inside the box left to it by its ancestors, and its children get
// the two halves of that box split at the node's coordinate along dimension
// depth mod 3. ref_search re-implements, step by step and independently of the
// RTL, the bounded depth-first kNN search with the same conventions (roots of
// the window's trees on the stack, tree 0 on top; near child on top; far child
// pushed only while the plane is closer than the K-th best; one stack pop per
// step; an elided pop drops its subtree). brute_knn gives the exact K
// smallest squared distances. With r2 >= 0 the references run the range
// search mode: only points within squared radius r2 are kept and a far child
// is also skipped when its plane lies outside the radius; brute_range gives
// the exact answer of that mode. ref_group runs several PEs in lock step with
// the bank arbitration of the hardware. build_kdtree turns a point set into a
// median-split kd-tree in heap order; lidar_scan and object_cloud make
// synthetic workloads (a spinning-LiDAR scan, a scan of two objects).
package sg_tb_pkg;
  import sg_pkg::*;

  typedef point_t pts_q[$];
  typedef nbr_t   nbr_q[$];
  typedef dist_t  dist_q[$];

  function automatic coord_t rnd_coord(int lo, int hi);
    int span;
    span = hi - lo + 1;
    return coord_t'(lo + int'($urandom % span));
  endfunction

  function automatic point_t rnd_point(int lim);
    point_t p;
    p.x = rnd_coord(-lim, lim);
    p.y = rnd_coord(-lim, lim);
    p.z = rnd_coord(-lim, lim);
    return p;
  endfunction

  function automatic int coord_i(point_t p, int d);
    return (d == 0) ? int'(p.x) : (d == 1) ? int'(p.y) : int'(p.z);
  endfunction

  function automatic pts_q gen_tree(int levels, int lim);
    pts_q t;
    int   nodes;
    int   lo[], hi[];   // box of node i along dimension d at i*3 + d
    t.delete();
    nodes = (1 << levels) - 1;
    lo = new[nodes * 3];
    hi = new[nodes * 3];
    for (int d = 0; d < 3; d++) begin lo[d] = -lim; hi[d] = lim; end
    for (int i = 0; i < nodes; i++) begin
      point_t p;
      int depth, dim, c;
      depth = $clog2(i + 2) - 1;
      dim   = depth % 3;
      p.x = rnd_coord(lo[i*3], hi[i*3]);
      p.y = rnd_coord(lo[i*3+1], hi[i*3+1]);
      p.z = rnd_coord(lo[i*3+2], hi[i*3+2]);
      t.push_back(p);
      c = coord_i(p, dim);
      if (2*i + 2 < nodes) begin
        for (int d = 0; d < 3; d++) begin
          lo[(2*i+1)*3+d] = lo[i*3+d]; hi[(2*i+1)*3+d] = (d == dim) ? c : hi[i*3+d];
          lo[(2*i+2)*3+d] = (d == dim) ? c : lo[i*3+d]; hi[(2*i+2)*3+d] = hi[i*3+d];
        end
      end
    end
    return t;
  endfunction

  function automatic longint d2_of(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x);
    dy = longint'(a.y) - longint'(b.y);
    dz = longint'(a.z) - longint'(b.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction


  // win_nodes: tree t node i at index t*nodes + i.
  // elide: decision for the n-th pop (missing entries mean no elision).
  // Returns K entries sorted by distance (ties keep visiting order).
  function automatic nbr_q ref_search(pts_q win_nodes, int nodes, int win, int k,
                                      int deadline, point_t q, bit elide[$],
                                      output bit cut, input longint r2 = -1);
    nbr_q best;
    int   st_tree[$], st_idx[$], st_dim[$];
    int   pops;
    best.delete(); st_tree.delete(); st_idx.delete(); st_dim.delete();
    for (int i = 0; i < k; i++) best.push_back('{valid: 1'b0, d2: '1, pt: '0});
    for (int t = win - 1; t >= 0; t--) begin
      st_tree.push_back(t); st_idx.push_back(0); st_dim.push_back(0);
    end
    pops = 0;
    for (int step = 0; step < deadline; step++) begin
      int tr, ix, dm, pos, diff, l, r;
      point_t p;
      longint d2, worst;
      bit full;
      nbr_t e;
      if (st_idx.size() == 0) continue;
      tr = st_tree.pop_back(); ix = st_idx.pop_back(); dm = st_dim.pop_back();
      pops++;
      if (pops - 1 < elide.size() && elide[pops - 1]) continue;
      p  = win_nodes[tr * nodes + ix];
      d2 = d2_of(q, p);
      pos = 0;
      for (int i = 0; i < k; i++) if (best[i].valid && longint'(best[i].d2) <= d2) pos++;
      e = '{valid: 1'b1, d2: dist_t'(d2), pt: p};
      if (pos < k && (r2 < 0 || d2 <= r2)) begin
        best.insert(pos, e);
        void'(best.pop_back());
      end
      full  = best[k-1].valid;
      worst = longint'(best[k-1].d2);
      diff  = coord_i(q, dm) - coord_i(p, dm);
      l = 2*ix + 1; r = 2*ix + 2;
      if (l < nodes) begin
        if ((!full || longint'(diff)*longint'(diff) < worst) &&
            (r2 < 0 || longint'(diff)*longint'(diff) <= r2)) begin
          st_tree.push_back(tr); st_idx.push_back(diff < 0 ? r : l); st_dim.push_back((dm + 1) % 3);
        end
        st_tree.push_back(tr); st_idx.push_back(diff < 0 ? l : r); st_dim.push_back((dm + 1) % 3);
      end
    end
    cut = (st_idx.size() != 0);
    return best;
  endfunction

  function automatic dist_q brute_knn(pts_q win_nodes, int k, point_t q);
    dist_q all;
    dist_q res;
    all.delete(); res.delete();
    foreach (win_nodes[i]) all.push_back(dist_t'(d2_of(q, win_nodes[i])));
    all.sort();
    for (int i = 0; i < k && i < all.size(); i++) res.push_back(all[i]);
    return res;
  endfunction

  // Range search: the nearest (up to) K points within squared radius r2.
  function automatic dist_q brute_range(pts_q win_nodes, int k, point_t q, longint r2);
    dist_q all;
    dist_q res;
    all.delete(); res.delete();
    foreach (win_nodes[i]) if (d2_of(q, win_nodes[i]) <= r2) all.push_back(dist_t'(d2_of(q, win_nodes[i])));
    all.sort();
    for (int i = 0; i < k && i < all.size(); i++) res.push_back(all[i]);
    return res;
  endfunction

  // Lock-step reference of NPE PEs sharing NBANK banks (lowest PE wins a
  // bank; a request for the winner's very node is served too; losers drop
  // the node). win_nodes as in ref_search; results are PE-major, K each.
  function automatic nbr_q ref_group(pts_q win_nodes, int nodes, int win, int k,
                                     int deadline, int nbank, pts_q qs,
                                     output int n_elided, output int n_cut,
                                     input longint r2 = -1);
    nbr_q best [];
    int   st_tree [][$];
    int   st_idx  [][$];
    int   st_dim  [][$];
    nbr_q res;
    int   npe;
    npe = qs.size();
    best = new[npe]; st_tree = new[npe]; st_idx = new[npe]; st_dim = new[npe];
    n_elided = 0; n_cut = 0;
    res.delete();
    for (int p = 0; p < npe; p++) begin
      best[p].delete(); st_tree[p].delete(); st_idx[p].delete(); st_dim[p].delete();
      for (int i = 0; i < k; i++) best[p].push_back('{valid: 1'b0, d2: '1, pt: '0});
      for (int t = win - 1; t >= 0; t--) begin
        st_tree[p].push_back(t); st_idx[p].push_back(0); st_dim[p].push_back(0);
      end
    end
    for (int step = 0; step < deadline; step++) begin
      int  rt [], ri [], rd [];
      bit  rq [], ok [];
      int  wtree [], widx [];
      rt = new[npe]; ri = new[npe]; rd = new[npe]; rq = new[npe]; ok = new[npe];
      wtree = new[nbank]; widx = new[nbank];
      for (int b = 0; b < nbank; b++) wtree[b] = -1;
      for (int p = 0; p < npe; p++) begin
        rq[p] = st_idx[p].size() != 0;
        ok[p] = 0;
        if (rq[p]) begin
          int b;
          rt[p] = st_tree[p].pop_back(); ri[p] = st_idx[p].pop_back(); rd[p] = st_dim[p].pop_back();
          b = ri[p] % nbank;
          if (wtree[b] < 0) begin wtree[b] = rt[p]; widx[b] = ri[p]; ok[p] = 1; end
          else if (wtree[b] == rt[p] && widx[b] == ri[p]) ok[p] = 1;
          else n_elided++;
        end
      end
      for (int p = 0; p < npe; p++) if (ok[p]) begin
        int pos, diff, l, r;
        point_t pt;
        longint d2, worst;
        nbr_t e;
        pt = win_nodes[rt[p] * nodes + ri[p]];
        d2 = d2_of(qs[p], pt);
        pos = 0;
        for (int i = 0; i < k; i++) if (best[p][i].valid && longint'(best[p][i].d2) <= d2) pos++;
        e = '{valid: 1'b1, d2: dist_t'(d2), pt: pt};
        if (pos < k && (r2 < 0 || d2 <= r2)) begin best[p].insert(pos, e); void'(best[p].pop_back()); end
        worst = longint'(best[p][k-1].d2);
        diff = coord_i(qs[p], rd[p]) - coord_i(pt, rd[p]);
        l = 2*ri[p] + 1; r = 2*ri[p] + 2;
        if (l < nodes) begin
          if ((!best[p][k-1].valid || longint'(diff)*longint'(diff) < worst) &&
              (r2 < 0 || longint'(diff)*longint'(diff) <= r2)) begin
            st_tree[p].push_back(rt[p]); st_idx[p].push_back(diff < 0 ? r : l); st_dim[p].push_back((rd[p] + 1) % 3);
          end
          st_tree[p].push_back(rt[p]); st_idx[p].push_back(diff < 0 ? l : r); st_dim[p].push_back((rd[p] + 1) % 3);
        end
      end
    end
    for (int p = 0; p < npe; p++) begin
      if (st_idx[p].size() != 0) n_cut++;
      for (int i = 0; i < k; i++) res.push_back(best[p][i]);
    end
    return res;
  endfunction

  // A chunk of n points whose key coordinate d lies in [lo, lo + span), and
  // the same chunk sorted stably by that key.
  function automatic void sort_chunk(int n, int lo, int span, logic [1:0] d,
                                     output pts_q raw, output pts_q srt);
    raw.delete(); srt.delete();
    for (int i = 0; i < n; i++) begin
      point_t p;
      p = rnd_point(2000);
      case (d)
        2'd0:    p.x = coord_t'(lo + int'($urandom % span));
        2'd1:    p.y = coord_t'(lo + int'($urandom % span));
        default: p.z = coord_t'(lo + int'($urandom % span));
      endcase
      raw.push_back(p);
    end
    foreach (raw[i]) begin
      int pos;
      pos = 0;
      while (pos < srt.size() && coord_i(srt[pos], d) <= coord_i(raw[i], d)) pos++;
      srt.insert(pos, raw[i]);
    end
  endfunction

  // Complete kd-tree in heap order from 2^levels - 1 points: sort along the
  // depth's coordinate, the median becomes the node, the lower half the left
  // subtree and the upper half the right subtree.
  // Median-split kd-tree in heap order, built breadth first without recursion:
  // each work item is a range of the working array and the heap node it fills.
  function automatic pts_q build_kdtree(pts_q pts);
    point_t heap[$];
    int w_lo[$], w_n[$], w_idx[$];
    heap.delete();
    for (int i = 0; i < pts.size(); i++) heap.push_back('0);
    w_lo.push_back(0); w_n.push_back(pts.size()); w_idx.push_back(0);
    while (w_lo.size() != 0) begin
      pts_q sub;
      int lo, n, idx, d, mid;
      lo = w_lo.pop_front(); n = w_n.pop_front(); idx = w_idx.pop_front();
      d = ($clog2(idx + 2) - 1) % 3;
      // sort the range by (coordinate, position): a positive 64-bit key per point
      begin
        longint keys[$];
        keys.delete();
        for (int i = 0; i < n; i++)
          keys.push_back((longint'(coord_i(pts[lo + i], d) + 32768) << 24) | longint'(i));
        keys.sort();
        sub.delete();
        for (int i = 0; i < n; i++) begin
          int j;
          j = int'(keys[i] % 64'd16777216);
          sub.push_back(pts[lo + j]);
        end
      end
      for (int i = 0; i < n; i++) pts[lo + i] = sub[i];
      mid = n / 2;
      heap[idx] = sub[mid];
      if (mid > 0) begin
        w_lo.push_back(lo);           w_n.push_back(mid);         w_idx.push_back(2*idx + 1);
        w_lo.push_back(lo + mid + 1); w_n.push_back(n - mid - 1); w_idx.push_back(2*idx + 2);
      end
    end
    return heap;
  endfunction

  // Synthetic spinning-LiDAR scan in sensor order (column by column, 64
  // beams per column from -24.8 to +2.0 degrees elevation). Beams hit a
  // ground plane 1.7 m below the sensor or a ring of walls whose distance
  // varies with azimuth. Units are centimetres.
  function automatic pts_q lidar_scan(int n);
    pts_q pts;
    int cols;
    real pi;
    pi = 3.14159265358979;
    pts.delete();
    cols = (n + 63) / 64;
    for (int c = 0; c < cols; c++)
      for (int b = 0; b < 64 && pts.size() < n; b++) begin
        real az, el, r_ground, r_wall, r, x, y, z;
        point_t p;
        az = 2.0 * pi * real'(c) / real'(cols);
        el = (-24.8 + 26.8 * real'(b) / 63.0) * pi / 180.0;
        r_wall = 1500.0 + 900.0 * $sin(3.0 * az) + 400.0 * $cos(7.0 * az) + real'($urandom % 20);
        r_ground = (el < -0.001) ? 170.0 / $tan(-el) : 1.0e9;
        r = (r_ground < r_wall) ? r_ground : r_wall;
        x = r * $cos(el) * $cos(az);
        y = r * $cos(el) * $sin(az);
        z = r * $sin(el);
        p.x = coord_t'($rtoi(x)); p.y = coord_t'($rtoi(y)); p.z = coord_t'($rtoi(z));
        pts.push_back(p);
      end
    return pts;
  endfunction

  // Synthetic object scan for one chunk: n points on the surfaces of a sphere
  // (radius 150) and a box (200 x 120 x 80) placed side by side in the x
  // interval [x0, x0 + 600), with up to 2 units of noise. Units are
  // millimetres. Chunks made with x0 600 apart partition the scene along x.
  function automatic pts_q object_cloud(int n, int x0);
    pts_q pts;
    real pi;
    pi = 3.14159265358979;
    pts.delete();
    for (int i = 0; i < n; i++) begin
      real x, y, z;
      point_t p;
      if (i % 2 == 0) begin
        real u, v;
        u = 2.0 * pi * real'($urandom % 10000) / 10000.0;
        v = $acos(2.0 * real'($urandom % 10000) / 10000.0 - 1.0);
        x = real'(x0) + 160.0 + 150.0 * $sin(v) * $cos(u);
        y = 150.0 * $sin(v) * $sin(u);
        z = 150.0 * $cos(v);
      end else begin
        real a, b;
        a = real'($urandom % 10000) / 10000.0;
        b = real'($urandom % 10000) / 10000.0;
        x = real'(x0) + 380.0; y = -60.0; z = -40.0;
        case ($urandom % 6)
          0: begin y += 120.0 * a; z += 80.0 * b; end
          1: begin x += 200.0; y += 120.0 * a; z += 80.0 * b; end
          2: begin x += 200.0 * a; z += 80.0 * b; end
          3: begin x += 200.0 * a; y += 120.0; z += 80.0 * b; end
          4: begin x += 200.0 * a; y += 120.0 * b; end
          default: begin x += 200.0 * a; y += 120.0 * b; z += 80.0; end
        endcase
      end
      p.x = coord_t'($rtoi(x) + int'($urandom % 5) - 2);
      p.y = coord_t'($rtoi(y) + int'($urandom % 5) - 2);
      p.z = coord_t'($rtoi(z) + int'($urandom % 5) - 2);
      pts.push_back(p);
    end
    return pts;
  endfunction

endpackage
