// tb_subtree_cache -- self-checking test of the subtree cache.
//
// A random SLTree sits in the memory model. SIDs are offered on the load
// side; after each fill the testbench looks the SID up (must hit, with the
// right node count) and reads back every node record through all four read
// ports, comparing with the tree. With 4 sets, a fifth SID of one set must
// stall the fill until a line of that set is released; the released line is
// the one replaced and no longer hits.
module tb_subtree_cache;
  import sltarch_pkg::*;
  import tb_tree_pkg::*;
  localparam int SETS = 4, WAYS = 4, NP = 4, SLOT_W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic [NP-1:0][SID_W-1:0] lk_sid;
  logic [NP-1:0] lk_hit, rd_en, rel_valid;
  logic [NP-1:0][SLOT_W-1:0] lk_slot, rd_slot, rel_slot;
  logic [NP-1:0][SIZE_W-1:0] lk_count, rd_idx;
  node_t [NP-1:0] rd_node;
  logic ld_valid, ld_done, mreq_v, mreq_r, mrsp_v, mrsp_last, busy;
  logic [SID_W-1:0] ld_sid, mreq_sid;
  node_t mrsp_node;
  logic [31:0] fill_stalls, lines_filled;
  int beats;
  int checks = 0, failures = 0;

  subtree_cache #(.WAYS(WAYS), .SETS(SETS), .NP(NP)) dut (
    .clk, .rst_n, .lk_sid, .lk_hit, .lk_slot, .lk_count, .rd_en, .rd_slot, .rd_idx, .rd_node,
    .rel_valid, .rel_slot, .ld_valid, .ld_sid, .ld_done,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_sid(mreq_sid),
    .mem_rsp_valid(mrsp_v), .mem_rsp_node(mrsp_node), .mem_rsp_last(mrsp_last),
    .busy, .fill_stalls, .lines_filled
  );
  subtree_mem #(.LAT(3)) u_mem (
    .clk, .rst_n, .req_valid(mreq_v), .req_ready(mreq_r), .req_sid(mreq_sid),
    .rsp_valid(mrsp_v), .rsp_node(mrsp_node), .rsp_last(mrsp_last), .beats
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic load(int sid);
    @(negedge clk); ld_valid = 1; ld_sid = SID_W'(sid);
    do @(posedge clk); while (!ld_done);
    @(negedge clk); ld_valid = 0;
  endtask

  // look up a SID on port p, then read its whole line through all ports
  task automatic verify(int sid, output logic [SLOT_W-1:0] slot);
    @(negedge clk);
    lk_sid[0] = SID_W'(sid);
    #1;
    check(lk_hit[0], $sformatf("hit for SID %0d", sid));
    check(int'(lk_count[0]) == st_count[sid], "node count");
    slot = lk_slot[0];
    for (int i = 0; i < st_count[sid]; i += NP) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin rd_en[p] = 1; rd_slot[p] = slot; rd_idx[p] = SIZE_W'((i + p) % st_count[sid]); end
      @(negedge clk);
      rd_en = '0;
      for (int p = 0; p < NP; p++) check(rd_node[p] == st_nodes[sid][(i + p) % st_count[sid]], "node record");
    end
  endtask

  task automatic release_slot(logic [SLOT_W-1:0] s);
    @(negedge clk); rel_valid[1] = 1; rel_slot[1] = s;
    @(negedge clk); rel_valid = '0;
  endtask

  logic [SLOT_W-1:0] slots [int];
  initial begin
    lk_sid = '0; rd_en = '0; rd_slot = '0; rd_idx = '0; rel_valid = '0; rel_slot = '0;
    ld_valid = 0; ld_sid = '0;
    build(8, 50);
    $display("tree: %0d subtrees", n_sub);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // sets 1..3 hold SIDs 1,2,3,5,6,7,..; fill and check, releasing as we go
    for (int s = 1; s < 13; s++) begin
      logic [SLOT_W-1:0] sl;
      load(s);
      verify(s, sl);
      slots[s] = sl;
      check(int'(sl) / WAYS == s % SETS, "line lies in the SID's set");
    end
    // set 0 now holds 4, 8, 12 unfinished; add 16 -> full set, then 20 must stall
    begin
      logic [SLOT_W-1:0] sl;
      int st0;
      load(16); verify(16, sl); slots[16] = sl;
      st0 = int'(fill_stalls);
      @(negedge clk); ld_valid = 1; ld_sid = SID_W'(20);
      repeat (40) @(posedge clk);
      check(!ld_done && int'(fill_stalls) > st0 + 30, "fill stalls while the set holds only unfinished subtrees");
      release_slot(slots[8]);
      do @(posedge clk); while (!ld_done);
      @(negedge clk); ld_valid = 0;
      verify(20, sl);
      check(sl == slots[8], "released line is the one replaced");
      lk_sid[2] = SID_W'(8);
      #1 check(!lk_hit[2], "replaced SID no longer hits");
      release_slot(slots[4]);
      lk_sid[3] = SID_W'(4);
      #1 check(!lk_hit[3], "finished line does not hit");
    end
    check(int'(lines_filled) == 14, "lines filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
