// tb_projection_unit -- self-checking test of the projection unit.
//
// Random camera-space Gaussians with positive-definite covariance (S = M*M^T
// from a random M) are projected and compared with the floating-point
// projection: centre within 0.15 px, conic within 3 % of its largest term,
// 3-sigma radius within +-1 px (+3 %), tau within 0.1. Gaussians behind the
// near plane or with zero opacity must come out invalid; both cases are
// counted and must occur. A random valid pattern checks the 1-cycle timing.
module tb_projection_unit;
  import sltarch_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  gauss_t gin;
  logic [15:0] focal, ccx, ccy;
  proj_t pout;
  int checks = 0, failures = 0, culled = 0, kept = 0;

  projection_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b, real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  function automatic gauss_t rand_gauss();
    gauss_t q;
    real m[3][3], s[3][3], z, sc;
    q = '0;
    z = 1.0 + $urandom_range(0, 10000) / 10000.0 * 60.0;
    sc = 0.02 + $urandom_range(0, 1000) / 1000.0 * 0.4 * (z / 10.0 + 0.3);
    foreach (m[i, j]) m[i][j] = ($urandom_range(0, 2000) / 1000.0 - 1.0) * sc;
    foreach (s[i, j]) begin
      s[i][j] = 0;
      for (int k = 0; k < 3; k++) s[i][j] += m[i][k] * m[j][k];
    end
    q.z = 16'($rtoi(z * 256));
    q.x = 16'($rtoi(($urandom_range(0, 2000) / 1000.0 - 1.0) * z * 0.6 * 256));
    q.y = 16'($rtoi(($urandom_range(0, 2000) / 1000.0 - 1.0) * z * 0.6 * 256));
    q.cov[5] = 16'($rtoi(s[0][0] * 256)); q.cov[4] = 16'($rtoi(s[0][1] * 256));
    q.cov[3] = 16'($rtoi(s[0][2] * 256)); q.cov[2] = 16'($rtoi(s[1][1] * 256));
    q.cov[1] = 16'($rtoi(s[1][2] * 256)); q.cov[0] = 16'($rtoi(s[2][2] * 256));
    q.op = 8'($urandom_range(1, 255));
    q.r = 8'($urandom); q.g = 8'($urandom); q.b = 8'($urandom);
    if ($urandom_range(0, 19) == 0) q.z = 16'($urandom_range(0, 50));
    if ($urandom_range(0, 19) == 0) q.op = 0;
    return q;
  endfunction

  initial begin
    gauss_t q;
    rproj_t r, h;
    real tol;
    focal = 16'd64; ccx = 16'd32; ccy = 16'd32;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      q = rand_gauss();
      gin <= q; in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      @(negedge clk);
      check(out_valid, "out_valid one cycle after in_valid");
      r = project(q, focal, ccx, ccy);
      h = from_fixed(pout);
      if (q.z < 16'd51 || q.op == 0) begin
        culled++;
        check(!pout.valid, "near/transparent Gaussian must be culled");
        continue;
      end
      if (!r.valid || r.radius != r.radius) continue;
      kept++;
      check(pout.valid, "valid");
      check(near(h.u, r.u, 0.15) && near(h.v, r.v, 0.15),
            $sformatf("centre %f,%f vs %f,%f", h.u, h.v, r.u, r.v));
      tol = 0.03 * ((r.ca > r.cc) ? r.ca : r.cc) + 0.0001;
      check(near(h.ca, r.ca, tol) && near(h.cb, r.cb, tol) && near(h.cc, r.cc, tol),
            $sformatf("conic %f %f %f vs %f %f %f", h.ca, h.cb, h.cc, r.ca, r.cb, r.cc));
      check(near(h.radius, r.radius, 1.0 + 0.03 * r.radius),
            $sformatf("radius %f vs %f", h.radius, r.radius));
      check(near(h.tau, r.tau, 0.1), $sformatf("tau %f vs %f (op %0d)", h.tau, r.tau, q.op));
      check(pout.r == q.r && pout.depth == q.z, "pass-through fields");
    end
    check(culled > 10 && kept > 500, "culled and kept Gaussians exercised");
    $display("kept %0d culled %0d", kept, culled);
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
