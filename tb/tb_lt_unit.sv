// tb_lt_unit -- self-checking test of one LT unit.
//
// The unit is surrounded by behavioural models: a subtree queue that hands
// out SIDs (every SID counts as loaded), and a cache in which the line of a
// subtree is simply its SID. The NIDs the unit selects are compared as a set
// with the reference cut, the number of visited nodes with the reference
// walk, each enqueued child SID must be one the reference descends into, and
// every traversed subtree must be released once. With enough queued work the
// unit must approach one node per cycle (the paper's per-cycle check).
module tb_lt_unit;
  import sltarch_pkg::*;
  import tb_tree_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  view_t view;
  logic deq_req, deq_gnt;
  logic [SID_W-1:0] deq_sid, lk_sid, enq_sid;
  logic [8:0] lk_slot, rd_slot, rel_slot;
  logic [SIZE_W-1:0] lk_count, rd_idx;
  logic rd_en, rel_valid, out_valid, out_ready, enq_valid, enq_ready, idle;
  node_t rd_node;
  logic [NID_W-1:0] out_nid;
  logic [31:0] visited;
  int checks = 0, failures = 0;

  lt_unit #(.RING(4), .SLOT_W(9)) dut (.*, .lk_hit(1'b1), .nodes_visited(visited));

  // queue model
  int q [$];
  assign deq_sid = (q.size() > 0) ? SID_W'(q[0]) : '0;
  assign deq_gnt = deq_req && q.size() > 0;
  assign lk_slot = 9'(lk_sid);
  assign lk_count = SIZE_W'(st_count[int'(lk_sid)]);
  int released [int];
  int got [int];
  int enq_total;
  always_ff @(posedge clk) begin
    if (rd_en) rd_node <= st_nodes[int'(rd_slot)][int'(rd_idx)];
    if (deq_gnt) void'(q.pop_front());
    if (enq_valid && enq_ready) begin q.push_back(int'(enq_sid)); enq_total++; end
    if (out_valid && out_ready) got[int'(out_nid)] = 1;
    if (rel_valid) released[int'(rel_slot)] = released.exists(int'(rel_slot)) ? released[int'(rel_slot)] + 1 : 1;
    out_ready <= ($urandom_range(0, 4) != 0);
    enq_ready <= ($urandom_range(0, 4) != 0);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    view = '0; out_ready = 1; enq_ready = 1; enq_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      int v0, miss, extra, c0, cyc, bad_rel;
      build(7, 40);
      view = rand_view(3 + 3 * t);
      ref_search(view);
      got.delete(); released.delete();
      v0 = int'(visited); enq_total = 0;
      c0 = $time;
      @(posedge clk); q.push_back(0);
      do @(posedge clk); while (!(idle && q.size() == 0));
      cyc = ($time - c0) / 10;
      miss = 0; extra = 0; bad_rel = 0;
      foreach (expect_nid[k]) if (!got.exists(k)) miss++;
      foreach (got[k]) if (!expect_nid.exists(k)) extra++;
      foreach (released[k]) if (released[k] != 1) bad_rel++;
      $display("tree %0d: cut %0d got %0d visited %0d/%0d subtrees %0d cycles %0d",
               t, expect_nid.num(), got.num(), int'(visited) - v0, ref_visited, released.num(), cyc);
      check(miss == 0 && extra == 0, "cut set");
      check(int'(visited) - v0 == ref_visited, "visited count");
      check(bad_rel == 0 && released.num() == enq_total + 1, "each traversed subtree released once");
    end
    // throughput: all subtrees of a tree with gran 0 (nothing selected ...
    // everything descended) with ready outputs: one node per cycle
    begin
      int v0, c0, cyc;
      build(5, 90);
      view = rand_view(0);
      for (int k = 0; k < 6; k++) view.planes[k] = '{a: 0, b: 0, c: 0, d: 1};
      @(posedge clk);
      for (int s = 0; s < n_sub; s++) q.push_back(s);   // all subtrees queued
      v0 = int'(visited); c0 = $time;
      force out_ready = 1'b1; force enq_ready = 1'b1;
      do @(posedge clk); while (!(idle && q.size() == 0));
      release out_ready; release enq_ready;
      cyc = ($time - c0) / 10;
      $display("throughput: %0d nodes in %0d cycles", int'(visited) - v0, cyc);
      check(int'(visited) - v0 >= n_nid - 1000, "all nodes visited");
      check(cyc <= (int'(visited) - v0) * 11 / 10 + 40, "about one node per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
