// tb_ref_pkg -- floating-point reference model of the splatting path, for
// the SPcore testbenches: projection of a camera-space Gaussian, the
// Gaussian exponent at a point, and front-to-back blending of one pixel.
// It follows the textbook 3D-Gaussian-splatting formulas in 'real'
// arithmetic, independent of the fixed-point RTL.
package tb_ref_pkg;
  import sltarch_pkg::*;

  typedef struct {
    bit  valid;
    real u, v;            // pixels
    real ca, cb, cc;      // conic, 1/px^2
    real radius;          // 3-sigma, pixels (before ceil)
    real tau;             // ln(1/(255*o))
    real depth;
    real op;
    real r, g, b;
  } rproj_t;

  function automatic rproj_t project(gauss_t gi, int f, int cx, int cy);
    rproj_t p;
    real x, y, z, jz, jx, jy, sxx, sxy, sxz, syy, syz, szz, A, B, C, det, mid, lam;
    x = real'($signed(gi.x)) / 256.0; y = real'($signed(gi.y)) / 256.0; z = real'(gi.z) / 256.0;
    sxx = real'($signed(gi.cov[5])) / 256.0; sxy = real'($signed(gi.cov[4])) / 256.0; sxz = real'($signed(gi.cov[3])) / 256.0;
    syy = real'($signed(gi.cov[2])) / 256.0; syz = real'($signed(gi.cov[1])) / 256.0; szz = real'($signed(gi.cov[0])) / 256.0;
    p = '{default: 0};
    if (z < 0.2 || gi.op == 0) return p;
    p.u = f * x / z + cx;
    p.v = f * y / z + cy;
    jz = f / z; jx = -f * x / (z * z); jy = -f * y / (z * z);
    A = jz*jz*sxx + 2*jz*jx*sxz + jx*jx*szz + 0.3;
    B = jz*jz*sxy + jz*jy*sxz + jz*jx*syz + jx*jy*szz;
    C = jz*jz*syy + 2*jz*jy*syz + jy*jy*szz + 0.3;
    det = A*C - B*B;
    if (det <= 0) return p;
    p.valid = 1;
    p.ca = C / det; p.cb = -B / det; p.cc = A / det;
    mid = (A + C) / 2;
    lam = mid + $sqrt((mid*mid - det > 0.1) ? mid*mid - det : 0.1);
    p.radius = 3.0 * $sqrt(lam);
    p.op = real'(gi.op) / 256.0;
    p.tau = $ln(1.0 / (255.0 * p.op));
    p.depth = z;
    p.r = gi.r; p.g = gi.g; p.b = gi.b;
    return p;
  endfunction

  function automatic real power(real ca, real cb, real cc, real dx, real dy);
    return -0.5 * (ca*dx*dx + cc*dy*dy) - cb*dx*dy;
  endfunction

  // fixed-point projected record -> real view of it
  function automatic rproj_t from_fixed(proj_t q);
    rproj_t p;
    p.valid = q.valid;
    p.u = real'($signed(q.u)) / 16.0; p.v = real'($signed(q.v)) / 16.0;
    p.ca = real'($signed(q.ca)) / 65536.0; p.cb = real'($signed(q.cb)) / 65536.0; p.cc = real'($signed(q.cc)) / 65536.0;
    p.radius = q.radius; p.tau = real'($signed(q.tau)) / 256.0; p.depth = real'(q.depth) / 256.0;
    p.op = real'(q.op) / 256.0; p.r = q.r; p.g = q.g; p.b = q.b;
    return p;
  endfunction

  // blending state of one pixel
  typedef struct {
    real t, r, g, b;
    bit  done;
  } rpix_t;

  function automatic rpix_t pix_init();
    rpix_t s;
    s.t = 1.0; s.r = 0; s.g = 0; s.b = 0; s.done = 0;
    return s;
  endfunction

  function automatic rpix_t pix_blend(rpix_t s, rproj_t p, real px, real py);
    real a, tt;
    if (s.done) return s;
    a = p.op * $exp(power(p.ca, p.cb, p.cc, px - p.u, py - p.v));
    if (a > 0.99) a = 0.99;
    tt = s.t * (1.0 - a);
    if (tt < 0.0001) begin s.done = 1; return s; end
    s.r += a * s.t * p.r; s.g += a * s.t * p.g; s.b += a * s.t * p.b;
    s.t = tt;
    return s;
  endfunction

  // Whole-frame reference: project, bin by the 3-sigma square into TILE x TILE
  // tiles, sort each tile's list by depth (ties by index), apply the group
  // alpha test at each 2x2 group centre and blend. img[y][x] gets r,g,b.
  typedef real img_t[][][3];
  function automatic void render(input gauss_t gs[$], input int f, cx, cy, w, h,
                                 output real img[][][3]);
    rproj_t pr[$];
    int T;
    T = TILE;
    img = new[h];
    foreach (img[y]) img[y] = new[w];
    foreach (gs[i]) pr.push_back(project(gs[i], f, cx, cy));
    for (int ty = 0; ty < h / T; ty++)
      for (int tx = 0; tx < w / T; tx++) begin
        int lst[$];
        foreach (pr[i]) begin
          int u, v, r;
          if (!pr[i].valid) continue;
          u = $floor(pr[i].u); v = $floor(pr[i].v); r = $ceil(pr[i].radius);
          if (u + r >= tx * T && u - r < (tx + 1) * T &&
              v + r >= ty * T && v - r < (ty + 1) * T) lst.push_back(i);
        end
        for (int i = 1; i < lst.size(); i++)
          for (int j = i; j > 0 && pr[lst[j-1]].depth > pr[lst[j]].depth; j--) begin
            int t; t = lst[j]; lst[j] = lst[j-1]; lst[j-1] = t;
          end
        for (int gy = 0; gy < T / 2; gy++)
          for (int gx = 0; gx < T / 2; gx++) begin
            rpix_t px[4];
            real ccx, ccy;
            ccx = tx * T + 2 * gx + 1.0; ccy = ty * T + 2 * gy + 1.0;
            foreach (px[k]) px[k] = pix_init();
            foreach (lst[n]) begin
              rproj_t q;
              q = pr[lst[n]];
              if (power(q.ca, q.cb, q.cc, ccx - q.u, ccy - q.v) <= q.tau) continue;
              for (int k = 0; k < 4; k++)
                px[k] = pix_blend(px[k], q, ccx - 0.5 + (k % 2), ccy - 0.5 + (k / 2));
            end
            for (int k = 0; k < 4; k++) begin
              int x, y;
              x = tx * T + 2 * gx + k % 2; y = ty * T + 2 * gy + k / 2;
              img[y][x][0] = px[k].r; img[y][x][1] = px[k].g; img[y][x][2] = px[k].b;
            end
          end
      end
  endfunction

  // random camera-space Gaussian in front of a camera with focal f whose
  // image is w x h pixels
  function automatic gauss_t rand_gauss(real zmin, real zmax, real fov);
    gauss_t q;
    real m[3][3], s[3][3], z, sc;
    q = '0;
    z = zmin + $urandom_range(0, 10000) / 10000.0 * (zmax - zmin);
    sc = (0.05 + $urandom_range(0, 1000) / 1000.0 * 0.25) * z * fov;
    foreach (m[i, j]) m[i][j] = ($urandom_range(0, 2000) / 1000.0 - 1.0) * sc;
    foreach (s[i, j]) begin
      s[i][j] = 0;
      for (int k = 0; k < 3; k++) s[i][j] += m[i][k] * m[j][k];
    end
    q.z = 16'($rtoi(z * 256));
    q.x = 16'($rtoi(($urandom_range(0, 2000) / 1000.0 - 1.0) * z * fov * 256));
    q.y = 16'($rtoi(($urandom_range(0, 2000) / 1000.0 - 1.0) * z * fov * 256));
    q.cov[5] = 16'($rtoi(s[0][0] * 256)); q.cov[4] = 16'($rtoi(s[0][1] * 256));
    q.cov[3] = 16'($rtoi(s[0][2] * 256)); q.cov[2] = 16'($rtoi(s[1][1] * 256));
    q.cov[1] = 16'($rtoi(s[1][2] * 256)); q.cov[0] = 16'($rtoi(s[2][2] * 256));
    q.op = 8'($urandom_range(30, 255));
    q.r = 8'($urandom); q.g = 8'($urandom); q.b = 8'($urandom);
    return q;
  endfunction
endpackage
