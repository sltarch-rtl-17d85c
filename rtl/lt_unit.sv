// lt_unit -- one LoD-tree traversal (LT) unit of LTcore.
//
// An LT unit walks subtrees of the SLTree one node per cycle. Nodes of a
// subtree sit in depth-first order in one subtree-cache line, so a traversal
// is a local index that either steps by 1 (descend into the node) or jumps by
// the node's remaining-subtree size (skip everything beneath it). For every
// node the unit reads the node record from the cache and makes two tests:
//   in_frustum : the node's AABB is not entirely outside any of the six
//                frustum planes (positive-vertex test);
//   lod_ok     : the projected extent of the node is below the granularity,
//                extent * 256 < gran * distance (no divider), where extent is
//                the largest AABB edge and distance the max-norm distance from
//                the camera to the AABB centre (both doubled to stay integer).
// in_frustum AND lod_ok   -> NID is written to the output buffer, skip.
// NOT in_frustum          -> skip, nothing written.
// otherwise               -> step by 1; if the node has a child subtree
//                            (child_sid != 0) that SID is enqueued.
// When the index passes the subtree's node count the traversal is done: the
// cache line is released and the context is free; any free context takes a
// new SID from the loaded segment of the subtree queue (also while the unit
// is held, so that the queue keeps draining).
//
// Ring buffer: RING traversal contexts {SID slot, index, count} are served in
// turn, one per cycle, so the two-cycle read/test loop of one context never
// stalls the unit: while one context waits for its node, the next issues.
//
// Timing: cycle t issues a cache read for the context at the ring pointer;
// cycle t+1 has the node (registered cache read), tests it and updates the
// context. Outputs (out_*, enq_*) are valid/ready; while a wanted output is
// not accepted the whole unit holds.
//
// Follows the paper: ring buffer of traversal states, MUX between a new SID and
// the current traversal on "done", frustum check and projection compared with
// the granularity, NID + 1 or NID + size, WriteNID and EnqueueSID outputs.
// This design's own choices: the ring depth, the frustum and projection
// arithmetic, skipping on an out-of-frustum node, enqueueing the child SID of
// every node that is descended into.
module lt_unit
  import sltarch_pkg::*;
#(
  parameter int unsigned RING     = 4,
  parameter int unsigned SLOT_W   = 9      // cache slot {set, way} width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  view_t                view,
  // subtree queue, loaded segment
  output logic                 deq_req,
  input  logic                 deq_gnt,
  input  logic [SID_W-1:0]     deq_sid,
  // subtree cache tag lookup (combinational)
  output logic [SID_W-1:0]     lk_sid,
  input  logic                 lk_hit,
  input  logic [SLOT_W-1:0]    lk_slot,
  input  logic [SIZE_W-1:0]    lk_count,
  // subtree cache node read (data one cycle later)
  output logic                 rd_en,
  output logic [SLOT_W-1:0]    rd_slot,
  output logic [SIZE_W-1:0]    rd_idx,
  input  node_t                rd_node,
  // release of a finished cache line
  output logic                 rel_valid,
  output logic [SLOT_W-1:0]    rel_slot,
  // selected node to the output buffer
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NID_W-1:0]     out_nid,
  // child subtree to the subtree queue
  output logic                 enq_valid,
  input  logic                 enq_ready,
  output logic [SID_W-1:0]     enq_sid,
  // status
  output logic                 idle,
  output logic [31:0]          nodes_visited
);

  localparam int unsigned RP_W = (RING > 1) ? $clog2(RING) : 1;

  typedef struct packed {
    logic              active;
    logic [SLOT_W-1:0] slot;
    logic [SIZE_W-1:0] idx;
    logic [SIZE_W-1:0] count;
  } ctx_t;

  ctx_t ring [RING];
  logic [RP_W-1:0] ptr;

  // stage B (node test) registers
  logic              b_valid;
  logic [RP_W-1:0]   b_ctx;

  // ---------------- node tests (stage B) ----------------
  logic in_frustum, lod_ok;
  logic signed [17:0] ext_x, ext_y, ext_z, ext_m;
  logic signed [18:0] dx, dy, dz;
  logic [18:0]        adx, ady, adz, dist2;
  logic [35:0]        lhs, rhs;

  function automatic logic plane_in(input plane_t p, input aabb_t b);
    logic signed [15:0] px, py, pz;
    logic signed [47:0] s;
    px = ($signed(p.a) >= 0) ? b.xmax : b.xmin;
    py = ($signed(p.b) >= 0) ? b.ymax : b.ymin;
    pz = (p.c >= 0) ? b.zmax : b.zmin;
    s  = 48'($signed(p.a) * px) + 48'($signed(p.b) * py) + 48'($signed(p.c) * pz) + 48'($signed(p.d));
    return (s >= 0);
  endfunction

  always_comb begin
    in_frustum = 1'b1;
    for (int k = 0; k < 6; k++)
      if (!plane_in(view.planes[k], rd_node.aabb)) in_frustum = 1'b0;
    ext_x = 18'($signed(rd_node.aabb.xmax)) - 18'($signed(rd_node.aabb.xmin));
    ext_y = 18'($signed(rd_node.aabb.ymax)) - 18'($signed(rd_node.aabb.ymin));
    ext_z = 18'($signed(rd_node.aabb.zmax)) - 18'($signed(rd_node.aabb.zmin));
    ext_m = ext_x;
    if (ext_y > ext_m) ext_m = ext_y;
    if (ext_z > ext_m) ext_m = ext_z;
    // doubled centre minus doubled camera position
    dx = 19'($signed(rd_node.aabb.xmin)) + 19'($signed(rd_node.aabb.xmax)) - (19'($signed(view.camx)) <<< 1);
    dy = 19'($signed(rd_node.aabb.ymin)) + 19'($signed(rd_node.aabb.ymax)) - (19'($signed(view.camy)) <<< 1);
    dz = 19'($signed(rd_node.aabb.zmin)) + 19'($signed(rd_node.aabb.zmax)) - (19'($signed(view.camz)) <<< 1);
    adx = dx[18] ? 19'(-dx) : 19'(dx);
    ady = dy[18] ? 19'(-dy) : 19'(dy);
    adz = dz[18] ? 19'(-dz) : 19'(dz);
    dist2 = adx;
    if (ady > dist2) dist2 = ady;
    if (adz > dist2) dist2 = adz;
    // extent/dist < gran/256  <=>  2*extent*256 < gran*dist2
    lhs = {10'd0, ext_m[17:0], 8'd0} <<< 1;
    rhs = 36'(view.gran) * 36'(dist2);
    lod_ok = lhs < rhs;
  end

  ctx_t bc;
  logic select_n, skip_n, want_out, want_enq, hold;
  logic [SIZE_W:0] next_idx;

  always_comb begin
    bc        = ring[b_ctx];
    select_n  = in_frustum && lod_ok;
    skip_n    = select_n || !in_frustum;
    want_out  = b_valid && select_n;
    want_enq  = b_valid && !skip_n && (rd_node.child_sid != '0);
    hold      = (want_out && !out_ready) || (want_enq && !enq_ready);
    next_idx  = skip_n ? ({1'b0, bc.idx} + {1'b0, rd_node.size}) : ({1'b0, bc.idx} + 1'b1);
    if (skip_n && rd_node.size == '0) next_idx = {1'b0, bc.idx} + 1'b1;  // malformed record guard
  end

  assign out_valid = want_out;
  assign out_nid   = rd_node.nid;
  assign enq_valid = want_enq;
  assign enq_sid   = rd_node.child_sid;

  // ---------------- issue (stage A) ----------------
  ctx_t ac;
  logic b_done, free_found;
  logic [RP_W-1:0] free_idx;
  always_comb begin
    ac      = ring[ptr];
    b_done  = b_valid && !hold && (next_idx >= {1'b0, bc.count});
    // any free context may take a new SID, also while the unit is held, so
    // the queue keeps draining when an LT unit waits to enqueue
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = RING - 1; i >= 0; i--)
      if (!ring[i].active) begin free_found = 1'b1; free_idx = RP_W'(i); end
    deq_req = free_found;
    lk_sid  = deq_sid;
    rd_en   = !hold && ac.active && !(b_valid && b_ctx == ptr);
    rd_slot = ac.slot;
    rd_idx  = ac.idx;
    rel_valid = b_done;
    rel_slot  = bc.slot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RING; i++) ring[i] <= '0;
      ptr <= '0;
      b_valid <= 1'b0;
      b_ctx <= '0;
      nodes_visited <= '0;
    end else begin
      if (deq_req && deq_gnt) begin
        ring[free_idx].active <= 1'b1;
        ring[free_idx].slot   <= lk_slot;
        ring[free_idx].idx    <= '0;
        ring[free_idx].count  <= lk_count;
      end
      if (!hold) begin
      // stage B update
      if (b_valid) begin
        nodes_visited <= nodes_visited + 1;
        if (b_done) ring[b_ctx].active <= 1'b0;
        else        ring[b_ctx].idx    <= next_idx[SIZE_W-1:0];
      end
      // stage A
      b_valid <= rd_en;
      b_ctx   <= ptr;
      ptr <= (ptr == RP_W'(RING - 1)) ? '0 : ptr + 1'b1;
      end
    end
  end

  always_comb begin
    idle = !b_valid;
    for (int i = 0; i < RING; i++) if (ring[i].active) idle = 1'b0;
  end

  // The loaded segment guarantees that every dequeued SID is in the cache.
  a_hit: assert property (@(posedge clk) disable iff (!rst_n) (deq_req && deq_gnt) |-> lk_hit);

endmodule
