// tb_tree_pkg -- random SLTree generator and reference LoD search for the
// LTcore testbenches.
//
// build() grows a random LoD tree directly in subtree form: every subtree
// holds at most TAU_S nodes in depth-first order with their remaining-subtree
// sizes; a node whose children do not fit (or, at random, any node) gets its
// children in a new subtree whose SID it records. Child boxes lie inside their
// parent's box and shrink with depth, as LoD nodes do. ref_search() computes
// the expected cut with a recursive walk of the whole tree, using its own
// plain-integer frustum and LoD tests, and stores it in 'expect_nid'.
package tb_tree_pkg;
  import sltarch_pkg::*;

  localparam int MAX_SUB = 512;

  node_t st_nodes [MAX_SUB][TAU_S];
  int    st_count [MAX_SUB];
  int    n_sub, n_nid;
  int    max_depth;
  int    sub_prob;     // percent chance of opening a new subtree
  int    expect_nid [int];
  int    ref_visited;

  function automatic aabb_t sub_box(aabb_t p);
    aabb_t b;
    int lx, ly, lz, nx, ny, nz;
    lx = int'(p.xmax) - int'(p.xmin);
    ly = int'(p.ymax) - int'(p.ymin);
    lz = int'(p.zmax) - int'(p.zmin);
    nx = lx * int'($urandom_range(35, 65)) / 100;
    ny = ly * int'($urandom_range(35, 65)) / 100;
    nz = lz * int'($urandom_range(35, 65)) / 100;
    b.xmin = 16'(int'(p.xmin) + int'($urandom_range(0, lx - nx)));
    b.ymin = 16'(int'(p.ymin) + int'($urandom_range(0, ly - ny)));
    b.zmin = 16'(int'(p.zmin) + int'($urandom_range(0, lz - nz)));
    b.xmax = 16'(int'(b.xmin) + nx);
    b.ymax = 16'(int'(b.ymin) + ny);
    b.zmax = 16'(int'(b.zmin) + nz);
    return b;
  endfunction

  function automatic void gen_node(int s, aabb_t box, int depth, int reserve);
    int idx, nc, ns;
    idx = st_count[s];
    st_count[s]++;
    st_nodes[s][idx] = '0;
    st_nodes[s][idx].nid  = NID_W'(n_nid);
    st_nodes[s][idx].aabb = box;
    n_nid++;
    if (depth < max_depth) begin
      nc = int'($urandom_range(1, 3));
      if (st_count[s] + nc + reserve <= TAU_S && int'($urandom_range(0, 99)) >= sub_prob) begin
        for (int k = 0; k < nc; k++) gen_node(s, sub_box(box), depth + 1, reserve + (nc - 1 - k));
      end else if (n_sub < MAX_SUB) begin
        ns = n_sub;
        n_sub++;
        st_count[ns] = 0;
        st_nodes[s][idx].child_sid = SID_W'(ns);
        for (int k = 0; k < nc; k++) gen_node(ns, sub_box(box), depth + 1, nc - 1 - k);
      end
    end
    st_nodes[s][idx].size = SIZE_W'(st_count[s] - idx);
  endfunction

  function automatic void build(int depth, int prob);
    aabb_t root;
    max_depth = depth;
    sub_prob  = prob;
    n_sub = 1;
    n_nid = 1000;
    st_count[0] = 0;
    root.xmin = -16'sd12000; root.ymin = -16'sd12000; root.zmin = -16'sd12000;
    root.xmax =  16'sd12000; root.ymax =  16'sd12000; root.zmax =  16'sd12000;
    gen_node(0, root, 0, 0);
  endfunction

  // ---------- reference tests ----------
  function automatic bit ref_in_frustum(view_t v, aabb_t b);
    for (int k = 0; k < 6; k++) begin
      longint s;
      s = longint'(v.planes[k].d);
      s += longint'(v.planes[k].a) * ((v.planes[k].a < 0) ? longint'(b.xmin) : longint'(b.xmax));
      s += longint'(v.planes[k].b) * ((v.planes[k].b < 0) ? longint'(b.ymin) : longint'(b.ymax));
      s += longint'(v.planes[k].c) * ((v.planes[k].c < 0) ? longint'(b.zmin) : longint'(b.zmax));
      if (s < 0) return 0;
    end
    return 1;
  endfunction

  function automatic longint labs(longint a);
    return (a < 0) ? -a : a;
  endfunction

  function automatic bit ref_lod_ok(view_t v, aabb_t b);
    longint e, d;
    e = longint'(b.xmax) - longint'(b.xmin);
    if (longint'(b.ymax) - longint'(b.ymin) > e) e = longint'(b.ymax) - longint'(b.ymin);
    if (longint'(b.zmax) - longint'(b.zmin) > e) e = longint'(b.zmax) - longint'(b.zmin);
    d = labs(longint'(b.xmin) + longint'(b.xmax) - 2 * longint'(v.camx));
    if (labs(longint'(b.ymin) + longint'(b.ymax) - 2 * longint'(v.camy)) > d)
      d = labs(longint'(b.ymin) + longint'(b.ymax) - 2 * longint'(v.camy));
    if (labs(longint'(b.zmin) + longint'(b.zmax) - 2 * longint'(v.camz)) > d)
      d = labs(longint'(b.zmin) + longint'(b.zmax) - 2 * longint'(v.camz));
    // extent / distance < gran / 256, distance = d / 2
    return (e * 512) < longint'(v.gran) * d;
  endfunction

  // recursive walk over one node and its descendants
  function automatic int walk(view_t v, int s, int idx);
    node_t n;
    int j;
    n = st_nodes[s][idx];
    ref_visited++;
    if (!ref_in_frustum(v, n.aabb)) return idx + int'(n.size);
    if (ref_lod_ok(v, n.aabb)) begin
      expect_nid[int'(n.nid)] = 1;
      return idx + int'(n.size);
    end
    if (n.child_sid != 0) begin
      j = 0;
      while (j < st_count[int'(n.child_sid)]) j = walk(v, int'(n.child_sid), j);
    end
    j = idx + 1;
    while (j < idx + int'(n.size)) j = walk(v, s, j);
    return j;
  endfunction

  function automatic void ref_search(view_t v);
    int j;
    expect_nid.delete();
    ref_visited = 0;
    j = 0;
    while (j < st_count[0]) j = walk(v, 0, j);
  endfunction

  function automatic view_t rand_view(int gran);
    view_t v;
    v = '0;
    for (int k = 0; k < 6; k++) begin
      v.planes[k].a = 16'(int'($urandom_range(0, 6)) - 3);
      v.planes[k].b = 16'(int'($urandom_range(0, 6)) - 3);
      v.planes[k].c = 16'(int'($urandom_range(0, 6)) - 3);
      v.planes[k].d = 32'(int'($urandom_range(0, 40000)) + 8000);
    end
    v.camx = 16'(int'($urandom_range(0, 8000)) - 4000);
    v.camy = 16'(int'($urandom_range(0, 8000)) - 4000);
    v.camz = -16'sd20000;
    v.gran = 16'(gran);
    return v;
  endfunction
endpackage
