// tb_global_buffer -- self-checking test of the double-buffered Gaussian
// buffer.
//
// Each frame fills the write bank with random Gaussians while the NR read
// ports read random addresses of the current bank; then the banks swap. The
// read data (one cycle after rd_en) must equal the previous frame's writes,
// and writes must never disturb the bank being read. Swaps are counted.
module tb_global_buffer;
  import sltarch_pkg::*;
  localparam int D = 64, NR = 4, AW = $clog2(D);
  logic clk = 0, rst_n = 0, swap = 0, cbank, wr_en = 0;
  logic [AW-1:0] wr_addr;
  gauss_t wr_data;
  logic [NR-1:0] rd_en = '0;
  logic [NR-1:0][AW-1:0] rd_addr;
  gauss_t [NR-1:0] rd_data;
  int checks = 0, failures = 0, swaps = 0;
  gauss_t cur[D], nxt[D];

  global_buffer #(.DEPTH(D), .NR(NR)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic gauss_t rnd();
    gauss_t q;
    q = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    return q;
  endfunction

  initial begin
    logic prev;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 20; f++) begin
      for (int a = 0; a < D; a++) nxt[a] = rnd();
      for (int a = 0; a < D; a++) begin
        logic [NR-1:0][AW-1:0] ra;
        logic [NR-1:0] re;
        for (int p = 0; p < NR; p++) begin ra[p] = AW'($urandom); re[p] = 1'($urandom); end
        wr_en <= 1; wr_addr <= AW'(a); wr_data <= nxt[a];
        rd_en <= re; rd_addr <= ra;
        @(posedge clk);
        wr_en <= 0; rd_en <= '0;
        @(negedge clk);
        if (f > 0)
          for (int p = 0; p < NR; p++)
            if (re[p]) check(rd_data[p] == cur[ra[p]], $sformatf("frame %0d port %0d addr %0d", f, p, ra[p]));
      end
      prev = cbank;
      swap <= 1; @(posedge clk); swap <= 0;
      @(negedge clk);
      check(cbank != prev, "bank toggles on swap");
      swaps++;
      cur = nxt;
    end
    $display("swaps %0d", swaps);
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
