// tb_output_buffer -- self-checking test of the double-buffered NID buffer.
//
// Random writes on four ports against a slow random drain. Every accepted
// NID must leave the write-back stream exactly once and in acceptance order
// (port order within a cycle); write readiness must follow the room left in
// the fill bank; 'last' must mark the end of each drained bank; a flush must
// push out a partly filled bank. Swaps, and cycles where writers had to wait
// because both banks were busy, must both occur.
module tb_output_buffer;
  import sltarch_pkg::*;
  localparam int BW = 16, NW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic [NW-1:0] wr_valid, wr_ready;
  logic [NW-1:0][NID_W-1:0] wr_nid;
  logic flush, wb_valid, wb_ready, wb_last, empty;
  logic [NID_W-1:0] wb_nid;
  logic [31:0] swaps;
  int checks = 0, failures = 0;

  output_buffer #(.BANK_WORDS(BW), .NW(NW)) dut (.*);

  int exp_q [$];
  int nxt = 100, waits = 0, lasts = 0, since_last = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wb_valid && wb_ready) begin
      check(exp_q.size() > 0 && int'(wb_nid) == exp_q[0], "write-back order");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      since_last++;
      if (wb_last) begin lasts++; check(since_last <= BW, "bank size"); since_last = 0; end
    end
    for (int i = 0; i < NW; i++) if (wr_valid[i] && wr_ready[i]) exp_q.push_back(int'(wr_nid[i]));
    if (|(wr_valid & ~wr_ready)) waits++;
  end

  initial begin
    wr_valid = '0; wr_nid = '0; flush = 0; wb_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int i = 0; i < NW; i++) begin
        wr_valid[i] = ($urandom_range(0, 9) < 3);
        wr_nid[i] = NID_W'(nxt + i);
      end
      nxt += NW;
      wb_ready = ($urandom_range(0, 9) < 7);
      #1;
      begin
        int acc;
        acc = 0;
        for (int i = 0; i < NW; i++) begin
          if (!wr_ready[i]) acc = acc;  // readiness is monotone over ports
          if (i > 0) check(!(wr_ready[i] && !wr_ready[i-1]), "ready in port order");
        end
      end
    end
    @(negedge clk); wr_valid = '0;
    // flush the partly filled bank
    repeat (3) begin
      @(negedge clk); flush = 1; wb_ready = 1;
      repeat (BW + 2) @(negedge clk);
    end
    flush = 0;
    repeat (2 * BW) @(posedge clk);
    check(exp_q.size() == 0, "everything drained after flush");
    check(empty, "empty after drain");
    check(swaps > 10, "banks swapped");
    check(waits > 0, "writers waited on a full fill bank");
    check(lasts == int'(swaps), "one 'last' per drained bank");
    $display("swaps %0d waits %0d lasts %0d", swaps, waits, lasts);
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
