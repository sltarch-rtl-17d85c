// alpha_check -- group-level transparency test of one Gaussian (SP unit).
//
// All four pixels of a 2x2 pixel group share one decision: the Gaussian's
// exponent ("power") is evaluated once, at the centre of the group, and the
// Gaussian is passed on to the group's blend units only if power > tau.
// tau = ln(1/(255*opacity)) comes with the Gaussian from the projection unit,
// so comparing the exponent with tau is the same as comparing
// opacity*exp(power) with 1/255, without computing an exponential.
//
// Purely combinational: pass and power follow the inputs in the same cycle.
// Coordinates are signed Q.4 pixels, the conic signed Q.16, power and tau
// signed Q.8.
//
// Follows the paper: 2x2 pixel groups, check at the group centre, exponent
// compared with a threshold instead of computing exp. This design's own
// choice: the fixed-point formats.
module alpha_check
  import sltarch_pkg::*;
(
  input  logic signed [15:0] u, v,          // Gaussian centre, Q.4
  input  logic signed [31:0] ca, cb, cc,    // conic, Q.16
  input  logic signed [15:0] tau,           // Q.8
  input  logic signed [15:0] cx, cy,        // group centre, Q.4
  output logic signed [31:0] power,         // Q.8
  output logic               pass
);
  logic signed [19:0] dx, dy;
  always_comb begin
    dx    = 20'(cx) - 20'(u);
    dy    = 20'(cy) - 20'(v);
    power = gauss_power(ca, cb, cc, dx, dy);
    pass  = power > 32'(tau);
  end
endmodule
