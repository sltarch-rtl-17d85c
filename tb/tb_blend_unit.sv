// tb_blend_unit -- self-checking test of one pixel blend unit.
//
// Sequences of random Gaussians around a pixel are blended front to back and
// compared with a floating-point model: colour within 3 levels, T within
// 1 % + 0.002. Some sequences are opaque enough to reach the 1e-4
// early-termination point; the testbench counts those and fails if none.
module tb_blend_unit;
  import sltarch_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, g_valid = 0;
  proj_t g;
  logic signed [15:0] px, py;
  rgb_t rgb;
  logic [16:0] trans;
  logic term;
  logic [31:0] blended;
  int checks = 0, failures = 0, terms = 0;

  blend_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic proj_t rand_gauss(int cxq, int cyq, int spread, int opmin);
    proj_t q;
    real a, c, b, op;
    q = '0;
    a = 0.01 + $urandom_range(0, 1000) / 1000.0 * 0.4;
    c = 0.01 + $urandom_range(0, 1000) / 1000.0 * 0.4;
    b = ($urandom_range(0, 1000) / 1000.0 - 0.5) * 0.9 * $sqrt(a * c);
    op = $urandom_range(opmin, 254) / 256.0;
    q.valid = 1;
    q.u = 16'(cxq + int'($urandom_range(0, 2 * spread)) - spread);
    q.v = 16'(cyq + int'($urandom_range(0, 2 * spread)) - spread);
    q.ca = 32'($rtoi(a * 65536)); q.cb = 32'($rtoi(b * 65536)); q.cc = 32'($rtoi(c * 65536));
    q.op = 8'($rtoi(op * 256));
    q.tau = 16'($rtoi($ln(1.0 / (255.0 * real'(q.op) / 256.0)) * 256));
    q.radius = 8'd10;
    q.r = 8'($urandom); q.g = 8'($urandom); q.b = 8'($urandom);
    return q;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      rpix_t ref_p;
      int ng;
      real ht;
      px = 16'($urandom_range(0, 1000)); py = 16'($urandom_range(0, 1000));
      clear <= 1; @(posedge clk); clear <= 0;
      ref_p = pix_init();
      ng = $urandom_range(1, 40);
      for (int n = 0; n < ng; n++) begin
        g <= rand_gauss(px, py, 64, (s % 2) ? 200 : 20);
        g_valid <= 1;
        @(posedge clk);
        ref_p = pix_blend(ref_p, from_fixed(g), real'(px) / 16.0, real'(py) / 16.0);
      end
      g_valid <= 0;
      @(posedge clk);
      ht = real'(trans) / 65536.0;
      check(int'(rgb.r) - $rtoi(ref_p.r) <= 3 && $rtoi(ref_p.r) - int'(rgb.r) <= 3,
            $sformatf("seq %0d r %0d vs %f", s, rgb.r, ref_p.r));
      check(int'(rgb.g) - $rtoi(ref_p.g) <= 3 && $rtoi(ref_p.g) - int'(rgb.g) <= 3, "g");
      check(int'(rgb.b) - $rtoi(ref_p.b) <= 3 && $rtoi(ref_p.b) - int'(rgb.b) <= 3, "b");
      check(ht - ref_p.t <= 0.002 + 0.01 * ref_p.t && ref_p.t - ht <= 0.002 + 0.01 * ref_p.t,
            $sformatf("T %f vs %f", ht, ref_p.t));
      if (ref_p.done) check(term || ht < 0.0005, "termination expected");
      if (term) begin terms++; check(ref_p.done || ref_p.t < 0.0005, "early termination not expected"); end
    end
    check(terms > 0, "early termination exercised");
    $display("early terminations %0d", terms);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
