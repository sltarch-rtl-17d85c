// tb_subtree_queue -- self-checking test of the two-segment subtree queue.
//
// Random enqueues on all five ports, random dequeue requests from four LT
// units and random load completions. A scoreboard keeps the FIFO contents
// and the number of loaded entries: SIDs must come out in enqueue order,
// the load side must offer exactly the oldest unloaded SID, a dequeue may
// only be granted for a loaded entry, grants must be one-hot and rotate, and
// enqueues must be accepted exactly while free slots remain.
module tb_subtree_queue;
  import sltarch_pkg::*;
  localparam int D = 16, NE = 5, ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic [NE-1:0] enq_valid, enq_ready;
  logic [NE-1:0][SID_W-1:0] enq_sid;
  logic [ND-1:0] deq_req, deq_gnt;
  logic [SID_W-1:0] deq_sid, ld_sid;
  logic ld_valid, ld_done, empty;
  logic [$clog2(D+1)-1:0] occ;
  logic [31:0] full_events;
  int checks = 0, failures = 0;

  subtree_queue #(.DEPTH(D), .NENQ(NE), .NDEQ(ND)) dut (.*, .occupancy(occ));

  int sb [$];
  int loaded = 0, next_sid = 1, gnt_seen [ND], fulls = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    enq_valid = '0; enq_sid = '0; deq_req = '0; ld_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int phase;
      phase = (cyc / 500) % 2;   // alternate filling and draining
      @(negedge clk);
      for (int i = 0; i < NE; i++) begin
        enq_valid[i] = ($urandom_range(0, 9) < (phase ? 2 : 6));
        enq_sid[i] = SID_W'(next_sid + i);
      end
      for (int i = 0; i < ND; i++) deq_req[i] = ($urandom_range(0, 9) < (phase ? 8 : 3));
      ld_done = ld_valid && ($urandom_range(0, 9) < 6);
      #1;
      // combinational checks
      begin
        int acc, free, g;
        free = D - sb.size();
        acc = 0;
        for (int i = 0; i < NE; i++) begin
          check(enq_ready[i] == (acc < free), "enq_ready follows free slots");
          if (enq_valid[i] && enq_ready[i]) acc++;
        end
        check($countones(deq_gnt) <= 1, "one-hot grant");
        check(!(|deq_gnt) || loaded > 0, "grant only for loaded entries");
        check((|deq_gnt) == ((|deq_req) && loaded > 0), "grant when requested and loaded");
        if (|deq_gnt) begin
          check(int'(deq_sid) == sb[0], "dequeue order");
          for (g = 0; g < ND; g++) if (deq_gnt[g]) begin check(deq_req[g], "grant to requester"); gnt_seen[g]++; end
        end
        check(ld_valid == (sb.size() > loaded), "ld_valid");
        if (ld_valid) check(int'(ld_sid) == sb[loaded], "load side offers oldest unloaded SID");
        check(int'(occ) == sb.size(), "occupancy");
        if (|(enq_valid & ~enq_ready)) fulls++;
      end
      @(posedge clk);
      // update scoreboard
      if (|deq_gnt) begin void'(sb.pop_front()); loaded--; end
      if (ld_done && ld_valid) loaded++;
      begin
        int acc;
        acc = 0;
        for (int i = 0; i < NE; i++) if (enq_valid[i] && enq_ready[i]) begin sb.push_back(int'(enq_sid[i])); acc++; end
      end
      next_sid += NE;
    end
    for (int g = 0; g < ND; g++) check(gnt_seen[g] > 20, "round robin serves every LT unit");
    check(fulls > 0, "queue became full");
    check(int'(full_events) > 0, "full events counted");
    $display("grants %0d %0d %0d %0d, full cycles %0d", gnt_seen[0], gnt_seen[1], gnt_seen[2], gnt_seen[3], fulls);
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
