// tb_sp_unit -- self-checking test of one SP unit (2x2 pixel group).
//
// Random Gaussians are streamed to a group. The floating-point model applies
// the same group-centre alpha test (power > tau) and blends the survivors
// into the four pixels. Gaussians whose power lies within 0.05 of tau are
// replaced, so the test decision is never ambiguous. Checks: rejected count
// equals the model, each pixel colour within 3 levels. Both accepted and
// rejected Gaussians must occur.
module tb_sp_unit;
  import sltarch_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, g_valid = 0;
  logic [11:0] gx, gy;
  proj_t g;
  rgb_t [3:0] rgb;
  logic [3:0] term;
  logic [31:0] tested, rejected;
  int checks = 0, failures = 0, ref_rej = 0, ref_pass = 0;

  sp_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic proj_t rand_gauss(int cxq, int cyq);
    proj_t q;
    real a, c, b;
    q = '0;
    a = 0.01 + $urandom_range(0, 1000) / 1000.0 * 0.4;
    c = 0.01 + $urandom_range(0, 1000) / 1000.0 * 0.4;
    b = ($urandom_range(0, 1000) / 1000.0 - 0.5) * 0.9 * $sqrt(a * c);
    q.valid = 1;
    q.u = 16'(cxq + int'($urandom_range(0, 200)) - 100);
    q.v = 16'(cyq + int'($urandom_range(0, 200)) - 100);
    q.ca = 32'($rtoi(a * 65536)); q.cb = 32'($rtoi(b * 65536)); q.cc = 32'($rtoi(c * 65536));
    q.op = 8'($urandom_range(20, 250));
    q.tau = 16'($rtoi($ln(1.0 / (255.0 * real'(q.op) / 256.0)) * 256));
    q.radius = 8'd10;
    q.r = 8'($urandom); q.g = 8'($urandom); q.b = 8'($urandom);
    return q;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 150; s++) begin
      rpix_t ref_p[4];
      real cxp, cyp;
      int ng;
      gx = 12'($urandom_range(0, 30)); gy = 12'($urandom_range(0, 30));
      cxp = 2.0 * gx + 1.0; cyp = 2.0 * gy + 1.0;
      clear <= 1; @(posedge clk); clear <= 0;
      foreach (ref_p[i]) ref_p[i] = pix_init();
      ng = $urandom_range(1, 30);
      for (int n = 0; n < ng; n++) begin
        proj_t q;
        rproj_t r;
        real pw;
        do begin
          q = rand_gauss(int'(cxp * 16), int'(cyp * 16));
          r = from_fixed(q);
          pw = tb_ref_pkg::power(r.ca, r.cb, r.cc, cxp - r.u, cyp - r.v);
        end while (pw - r.tau < 0.05 + 0.02 * (pw < 0 ? -pw : pw) &&
                   r.tau - pw < 0.05 + 0.02 * (pw < 0 ? -pw : pw));
        g <= q; g_valid <= 1;
        @(posedge clk);
        if (pw > r.tau) begin
          ref_pass++;
          for (int i = 0; i < 4; i++)
            ref_p[i] = pix_blend(ref_p[i], r, 2.0 * gx + (i % 2) + 0.5, 2.0 * gy + (i / 2) + 0.5);
        end else ref_rej++;
      end
      g_valid <= 0;
      @(posedge clk);
      for (int i = 0; i < 4; i++) begin
        check(int'(rgb[i].r) - $rtoi(ref_p[i].r) <= 3 && $rtoi(ref_p[i].r) - int'(rgb[i].r) <= 3,
              $sformatf("seq %0d px %0d r %0d vs %f", s, i, rgb[i].r, ref_p[i].r));
        check(int'(rgb[i].g) - $rtoi(ref_p[i].g) <= 3 && $rtoi(ref_p[i].g) - int'(rgb[i].g) <= 3, "g");
        check(int'(rgb[i].b) - $rtoi(ref_p[i].b) <= 3 && $rtoi(ref_p[i].b) - int'(rgb[i].b) <= 3, "b");
      end
      check(rejected == 32'(ref_rej), $sformatf("rejected %0d vs %0d", rejected, ref_rej));
      check(tested == 32'(ref_rej + ref_pass), "tested count");
    end
    check(ref_rej > 50 && ref_pass > 50, "both alpha-check outcomes exercised");
    $display("passed %0d rejected %0d", ref_pass, ref_rej);
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
