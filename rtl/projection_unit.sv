// projection_unit -- projects one camera-space 3D Gaussian onto the screen.
//
// For a Gaussian with mean (x, y, z) and 3D covariance S it computes
//   screen centre   u = f*x/z + cx,  v = f*y/z + cy            (Q.4 pixels)
//   Jacobian        J = [f/z 0 -f*x/z^2 ; 0 f/z -f*y/z^2]
//   2D covariance   S2 = J S J^T + 0.3 I                        (Q.16 px^2)
//   conic           inverse of S2                               (Q.16)
//   3-sigma radius  ceil(3*sqrt(lambda_max)),
//                   lambda_max = mid + sqrt(max(0.1, mid^2 - det))
//   threshold       tau = ln(256/255) - ln(op), with ln from a
//                   leading-one (Mitchell) log2 approximation   (Q.8)
// and passes depth = z and the colour through. A Gaussian nearer than 0.2,
// with opacity 0 or with a singular 2D covariance is marked invalid (culled).
// The 3-sigma radius is what the duplication unit uses for its basic
// Gaussian-tile intersection test.
//
// Timing: fully combinational datapath followed by one output register:
// in_valid at cycle t gives out_valid at t+1, one Gaussian per cycle.
//
// The paper takes this unit from an earlier accelerator (GSCore) and says
// only that it uses the basic 3-sigma test; the formulas are the standard
// 3D-Gaussian-splatting projection. Own choices here: Gaussians arrive
// already in camera space (no view rotation in this unit), fixed-point
// formats, the log approximation, and computing tau here once per Gaussian.
module projection_unit
  import sltarch_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  gauss_t             gin,
  input  logic [15:0]        focal,       // pixels
  input  logic [15:0]        ccx, ccy,    // principal point, pixels
  output logic               out_valid,
  output proj_t              pout
);
  localparam logic [15:0] Z_NEAR = 16'd51;   // 0.2 in Q8.8

  function automatic logic [63:0] isqrt(input logic [63:0] a);
    logic [63:0] r, b, t;
    r = '0;
    b = 64'h4000_0000_0000_0000;
    for (int i = 0; i < 32; i++) begin
      t = r + b;
      if (a >= t) begin a = a - t; r = (r >> 1) + b; end
      else r = r >> 1;
      b = b >> 2;
    end
    return r;
  endfunction

  proj_t p;
  always_comb begin
    logic signed [63:0]  fx, zz, ox, oy, gx, gy, jz, jx, jy, sxx, sxy, sxz, syy, syz, szz;
    logic signed [127:0] A, B, C, det, mid, disc, lam;
    logic [63:0] s_l;
    logic [3:0]  msb;
    logic [15:0] lg2, lnv;

    fx  = 64'(focal);
    zz  = 64'(gin.z);
    ox  = 64'(ccx); oy = 64'(ccy);
    gx  = 64'($signed(gin.x)); gy = 64'($signed(gin.y));
    sxx = 64'($signed(gin.cov[5])); sxy = 64'($signed(gin.cov[4])); sxz = 64'($signed(gin.cov[3]));
    syy = 64'($signed(gin.cov[2])); syz = 64'($signed(gin.cov[1])); szz = 64'($signed(gin.cov[0]));
    p   = '0;
    A = '0; B = '0; C = '0; det = '0; mid = '0; disc = '0; lam = '0; s_l = '0;
    jz = '0; jx = '0; jy = '0;
    msb = '0; lg2 = '0; lnv = '0;
    if (gin.z >= Z_NEAR && gin.op != 0) begin
      p.u  = 16'(((fx * gx) <<< 4) / zz + (ox <<< 4));
      p.v  = 16'(((fx * gy) <<< 4) / zz + (oy <<< 4));
      jz   = (fx <<< 24) / zz;                 // Q.16
      jx   = -((jz * gx) / zz);                 // Q.16
      jy   = -((jz * gy) / zz);
      // J S J^T: Q.16 * Q.16 * Q.8 = Q.40, scaled to Q.16
      A = (128'(jz)*jz*sxx + 2*128'(jz)*jx*sxz + 128'(jx)*jx*szz) >>> 24;
      B = (128'(jz)*jz*sxy + 128'(jz)*jy*sxz + 128'(jz)*jx*syz + 128'(jx)*jy*szz) >>> 24;
      C = (128'(jz)*jz*syy + 2*128'(jz)*jy*syz + 128'(jy)*jy*szz) >>> 24;
      A = A + 128'sd19661;                     // + 0.3 in Q.16
      C = C + 128'sd19661;
      det = A*C - B*B;                         // Q.32
      if (det > 0) begin
        p.valid = 1'b1;
        p.ca = 32'((C <<< 32) / det);          // Q.16
        p.cb = 32'(-((B <<< 32) / det));
        p.cc = 32'((A <<< 32) / det);
        mid  = (A + C) >>> 1;                  // Q.16
        disc = mid*mid - det;                  // Q.32
        if (disc < 128'sd429496730) disc = 128'sd429496730;   // 0.1
        lam  = mid + 128'(isqrt(64'(disc)));   // Q.16
        s_l  = isqrt(64'(lam) << 16);          // sqrt(lambda), Q.16
        p.radius = 16'((3 * s_l + 65535) >> 16);
      end
      // ln(op) by Mitchell log2: msb + mantissa fraction, times ln 2
      for (int i = 0; i < 8; i++) if (gin.op[i]) msb = 4'(i);
      lg2  = {4'd0, msb, 8'd0} + 16'((16'(gin.op) << (8 - msb)) & 16'h00ff);
      lnv  = 16'((32'(lg2) * 32'd177) >> 8);
      p.tau = 16'sd1 - $signed(lnv);
      p.depth = gin.z;
      p.op = gin.op;
      p.r = gin.r; p.g = gin.g; p.b = gin.b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pout <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) pout <= p;
    end
  end
endmodule
