// tb_sorting_unit -- self-checking test of the insertion sorter.
//
// Each round clears the unit, offers a random number of random keys (few
// distinct tiles and depths so that ties occur, sometimes more than the
// capacity), seals, and drains with a random out_ready. The drained keys
// must equal a stable sort by {tile, depth} of the accepted keys, and the
// overflow counter must grow by the number of dropped keys. Overflow must
// occur at least once.
module tb_sorting_unit;
  import sltarch_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, seal = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  key_t in_key, out_key;
  logic [$clog2(N+1)-1:0] count;
  logic [31:0] overflow;
  int checks = 0, failures = 0, dropped = 0;

  sorting_unit #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 300; r++) begin
      key_t acc[$], srt[$];
      int nk;
      acc.delete(); srt.delete();
      clear <= 1; @(posedge clk); clear <= 0;
      nk = $urandom_range(0, N + 6);
      for (int i = 0; i < nk; i++) begin
        key_t k;
        k.tile = TILE_W'($urandom_range(0, 5));
        k.depth = DEPTH_W'($urandom_range(0, 7));
        k.gid = GID_W'(i);
        in_key <= k; in_valid <= 1;
        @(posedge clk);
        if (acc.size() < N) acc.push_back(k); else dropped++;
      end
      in_valid <= 0;
      seal <= 1; @(posedge clk); seal <= 0;
      // stable sort model
      srt = acc;
      for (int i = 1; i < srt.size(); i++)
        for (int j = i; j > 0 && {srt[j-1].tile, srt[j-1].depth} > {srt[j].tile, srt[j].depth}; j--) begin
          key_t t; t = srt[j]; srt[j] = srt[j-1]; srt[j-1] = t;
        end
      check(int'(count) == srt.size(), $sformatf("count after load %0d vs %0d (nk %0d)", count, srt.size(), nk));
      foreach (srt[i]) begin
        out_ready <= 0;
        while ($urandom_range(0, 2) == 0) @(posedge clk);
        out_ready <= 1;
        @(negedge clk);
        check(out_valid && out_key == srt[i], $sformatf("round %0d item %0d: %h vs %h", r, i, out_key, srt[i]));
        @(posedge clk);
      end
      out_ready <= 0;
      @(negedge clk);
      check(!out_valid, "empty after drain");
      check(overflow == 32'(dropped), "overflow count");
    end
    check(dropped > 0, "overflow exercised");
    $display("dropped %0d", dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
