// tb_alpha_check -- self-checking test of the group alpha-check.
//
// Random conics, centres and thresholds. The exponent must match the
// floating-point value within 2 % + 0.02, and the pass decision must equal
// power > tau wherever the two are not within that tolerance of each other.
module tb_alpha_check;
  import sltarch_pkg::*;
  import tb_ref_pkg::*;
  logic signed [15:0] u, v, tau, cx, cy;
  logic signed [31:0] ca, cb, cc, power;
  logic pass;
  int checks = 0, failures = 0, passes = 0, rejects = 0;

  alpha_check dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real rp, hp, rtau, tol, a, c, b;
      a = 0.005 + $urandom_range(0, 10000) / 10000.0 * 0.5;
      c = 0.005 + $urandom_range(0, 10000) / 10000.0 * 0.5;
      b = ($urandom_range(0, 10000) / 10000.0 - 0.5) * 0.9 * $sqrt(a * c);
      ca = 32'($rtoi(a * 65536)); cc = 32'($rtoi(c * 65536)); cb = 32'($rtoi(b * 65536));
      u = 16'($urandom_range(0, 1023)); v = 16'($urandom_range(0, 1023));
      cx = 16'(int'(u) + int'($urandom_range(0, 320)) - 160);
      cy = 16'(int'(v) + int'($urandom_range(0, 320)) - 160);
      tau = 16'(-int'($urandom_range(0, 1500)));
      #1;
      rp = tb_ref_pkg::power(real'(ca) / 65536.0, real'(cb) / 65536.0, real'(cc) / 65536.0,
                 real'(cx - u) / 16.0, real'(cy - v) / 16.0);
      if (rp < -127.0) rp = -128.0;
      hp = real'(power) / 256.0;
      rtau = real'(tau) / 256.0;
      tol = 0.02 + 0.02 * ((rp < 0) ? -rp : rp);
      check((hp - rp) <= tol && (rp - hp) <= tol, $sformatf("power %f vs %f", hp, rp));
      if (rp > rtau + tol) begin check(pass, "pass"); passes++; end
      else if (rp < rtau - tol) begin check(!pass, "reject"); rejects++; end
    end
    check(passes > 100 && rejects > 100, "both outcomes exercised");
    $display("passes %0d rejects %0d", passes, rejects);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
