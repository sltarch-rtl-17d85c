// tb_ltcore -- self-checking test of the LoD-search core.
//
// Several random SLTrees and views are searched. The NIDs the core writes
// back are compared, as a set, with the reference cut of tb_tree_pkg; the
// number of nodes visited must equal the reference walk's. The core is
// built small (4 sets, 4-entry queue, 8-word output banks) so that cache
// fill stalls, queue-full backpressure and output-buffer swaps all occur;
// each must be seen at least once.
module tb_ltcore;
  localparam int TB_SETS = 1;
  localparam int TB_Q = 16;
  import sltarch_pkg::*;
  import tb_tree_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic start, busy, done;
  view_t view;
  logic mreq_v, mreq_r, mrsp_v, mrsp_last;
  logic [SID_W-1:0] mreq_sid;
  node_t mrsp_node;
  logic nid_valid, nid_ready, nid_last;
  logic [NID_W-1:0] nid;
  logic [31:0] c_nodes, c_qfull, c_fstall, c_swaps, c_sub;
  int beats;
  int checks = 0, failures = 0;

  ltcore #(.SETS(TB_SETS), .QDEPTH(TB_Q), .BANK_WORDS(8)) dut (
    .clk, .rst_n, .start, .root_sid('0), .view, .busy, .done,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_sid(mreq_sid),
    .mem_rsp_valid(mrsp_v), .mem_rsp_node(mrsp_node), .mem_rsp_last(mrsp_last),
    .nid_valid, .nid_ready, .nid, .nid_last,
    .cnt_nodes(c_nodes), .cnt_queue_full(c_qfull), .cnt_fill_stall(c_fstall),
    .cnt_obuf_swaps(c_swaps), .cnt_subtrees(c_sub)
  );
  subtree_mem #(.LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(mreq_v), .req_ready(mreq_r), .req_sid(mreq_sid),
    .rsp_valid(mrsp_v), .rsp_node(mrsp_node), .rsp_last(mrsp_last), .beats
  );

  int got [int];
  int dup_cnt;
  always_ff @(posedge clk) begin
    if (nid_valid && nid_ready) begin
      if (got.exists(int'(nid))) dup_cnt++;
      got[int'(nid)] = 1;
    end
  end
  always_ff @(posedge clk) nid_ready <= ($urandom_range(0, 3) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int tot_qfull = 0, tot_fstall = 0, tot_swaps = 0;
  initial begin
    start = 0; view = '0; dup_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int miss, extra, nodes0, q0, f0, s0;
      build(7, (t % 2) ? 60 : 30);
      view = rand_view(3 + 3 * t);
      ref_search(view);
      got.delete();
      nodes0 = int'(c_nodes); q0 = int'(c_qfull); f0 = int'(c_fstall); s0 = int'(c_swaps);
      @(posedge clk); start <= 1; @(posedge clk); start <= 0; @(posedge clk);
      wait (done);
      @(posedge clk);
      miss = 0; extra = 0;
      foreach (expect_nid[k]) if (!got.exists(k)) miss++;
      foreach (got[k]) if (!expect_nid.exists(k)) extra++;
      $display("tree %0d: %0d subtrees, %0d nodes, cut %0d, got %0d, visited %0d/%0d",
               t, n_sub, n_nid - 1000, expect_nid.num(), got.num(), int'(c_nodes) - nodes0, ref_visited);
      check(miss == 0 && extra == 0, $sformatf("cut mismatch: %0d missing, %0d extra", miss, extra));
      check(int'(c_nodes) - nodes0 == ref_visited, "visited node count");
      tot_qfull += int'(c_qfull) - q0; tot_fstall += int'(c_fstall) - f0; tot_swaps += int'(c_swaps) - s0;
    end
    check(dup_cnt == 0, "NID written twice");
    $display("events: queue full %0d, fill stalls %0d, obuf swaps %0d", tot_qfull, tot_fstall, tot_swaps);
    check(tot_qfull > 0, "queue-full backpressure never happened");
    check(tot_fstall > 0, "cache fill stall never happened");
    check(tot_swaps > 0, "output buffer swap never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
