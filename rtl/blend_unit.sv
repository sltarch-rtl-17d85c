// blend_unit -- front-to-back colour blending of one pixel.
//
// For every Gaussian that the group's alpha-check lets through, the unit
//   1. evaluates the exponent at its own pixel centre and turns it into an
//      opacity: alpha = min(0.99, op * exp(power))  ("alpha-Comp.");
//   2. computes the candidate transmittance T' = T * (1 - alpha);
//   3. if T' < 1e-4 the pixel is finished: this and all later Gaussians are
//      ignored (early termination);
//   4. otherwise adds alpha*T*colour to the R, G and B accumulators (three
//      MACs) and keeps T'.
// 'clear' starts a new pixel (T = 1, colours 0). One Gaussian per cycle; the
// accumulators are registers, so a result is visible the cycle after its
// Gaussian. rgb is the accumulated colour rounded down, saturated at 255.
//
// exp(p) is computed as 2^(p*log2 e): integer part as a right shift,
// fractional part 2^-f by the quadratic 1 - 0.6565 f + 0.1565 f^2 (error
// below 0.3 %). Formats: alpha Q.12, T Q.16, accumulators Q.16.
//
// Follows the paper: alpha computation, 1 - alpha, product with the
// accumulated transmittance, the 1e-4 comparison, one MAC per colour channel
// into a temporary result. This design's own choices: the exp approximation
// and all number formats. As in the paper's scheme there is no per-pixel
// 1/255 test: the group decision alone selects the Gaussians.
module blend_unit
  import sltarch_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               g_valid,
  input  proj_t              g,
  input  logic signed [15:0] px, py,       // pixel centre, Q.4
  output rgb_t               rgb,
  output logic [16:0]        trans,        // T, Q.16
  output logic               term,         // early-terminated
  output logic [31:0]        blended       // Gaussians accumulated
);
  localparam logic [16:0] T_MIN = 17'd7;   // 1e-4 in Q.16

  logic [16:0] t_q;
  logic [25:0] acc_r, acc_g, acc_b;
  logic        done_q;

  logic signed [31:0] pw;
  logic [31:0]        t8;       // -power*log2(e), Q.8
  logic [7:0]         fr;
  logic [23:0]        k;
  logic [12:0]        m, e;     // Q.12
  logic [20:0]        a_full;
  logic [12:0]        alpha;    // Q.12
  logic [16:0]        test_t;
  logic [16:0]        w;        // alpha*T, Q.16

  always_comb begin
    pw = gauss_power($signed(g.ca), $signed(g.cb), $signed(g.cc), 20'(px) - 20'($signed(g.u)), 20'(py) - 20'($signed(g.v)));
    if (pw > 0) pw = '0;
    t8 = 32'((64'(-pw) * 64'd369) >> 8);
    fr = t8[7:0];
    k  = t8[31:8];
    m  = 13'(32'd4096 - ((32'd2689 * 32'(fr)) >> 8) + ((32'd641 * 32'(fr) * 32'(fr)) >> 16));
    e  = (k >= 24'd13) ? 13'd0 : (m >> k);
    a_full = 21'(g.op) * 21'(e);
    alpha  = 13'(a_full >> 8);
    if (alpha > 13'd4055) alpha = 13'd4055;
    test_t = 17'((34'(t_q) * 34'(13'd4096 - alpha)) >> 12);
    w      = 17'((34'(t_q) * 34'(alpha)) >> 12);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= 17'h10000; acc_r <= '0; acc_g <= '0; acc_b <= '0; done_q <= 1'b0; blended <= '0;
    end else if (clear) begin
      t_q <= 17'h10000; acc_r <= '0; acc_g <= '0; acc_b <= '0; done_q <= 1'b0;
    end else if (g_valid && !done_q) begin
      if (test_t < T_MIN) begin
        done_q <= 1'b1;
      end else begin
        acc_r <= acc_r + 26'(w) * 26'(g.r);
        acc_g <= acc_g + 26'(w) * 26'(g.g);
        acc_b <= acc_b + 26'(w) * 26'(g.b);
        t_q   <= test_t;
        blended <= blended + 1;
      end
    end
  end

  function automatic logic [7:0] sat8(input logic [25:0] a);
    return (a[25:16] > 10'd255) ? 8'd255 : a[23:16];
  endfunction

  assign rgb.r = sat8(acc_r);
  assign rgb.g = sat8(acc_g);
  assign rgb.b = sat8(acc_b);
  assign trans = t_q;
  assign term  = done_q;
endmodule
