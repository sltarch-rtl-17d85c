// tb_spcore -- self-checking test of the splatting core on a small image.
//
// Several frames of random camera-space Gaussians are placed in a
// behavioural global buffer (one-cycle read latency), rendered, and the
// tile stream is compared with the floating-point frame reference of the
// whole pipeline (projection, 3-sigma tile binning, depth sort, group alpha
// test, blending). Fixed-point rounding can move a Gaussian across the tile
// or alpha-test boundary, so each pixel channel may differ by up to 12 and
// the frame's mean channel error must stay below 1.0. The last frame has
// more keys than the sorters hold; it is only checked for overflow. Frame 3
// piles opaque Gaussians in the middle to force early termination. The
// pixel consumer applies random back-pressure. Mechanism counters (alpha
// rejections, early terminations, overflow) must all be non-zero.
module tb_spcore;
  import sltarch_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 16, H = 16, NG = 64, AW = $clog2(NG), F = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done, pix_valid, pix_ready = 0;
  logic [AW:0] n_gauss;
  logic [15:0] focal = 16'(F), ccx = 16'(W / 2), ccy = 16'(H / 2);
  logic [3:0] gb_rd_en;
  logic [3:0][AW-1:0] gb_rd_addr;
  gauss_t [3:0] gb_rd_data;
  logic [TILE_W-1:0] pix_tile;
  rgb_t [15:0] pix_rgb;
  logic [31:0] cnt_keys, cnt_sort_overflow, cnt_alpha_rejected, cnt_early_term, cnt_tiles;
  int checks = 0, failures = 0;
  gauss_t gmem[NG];
  rgb_t img[H][W];
  int tiles_seen;

  spcore #(.NG_MAX(NG), .SORT_N(128), .IMG_W(W), .IMG_H(H)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_ff @(posedge clk)
    for (int l = 0; l < 4; l++) if (gb_rd_en[l]) gb_rd_data[l] <= gmem[gb_rd_addr[l]];
  always_ff @(posedge clk) pix_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (pix_valid && pix_ready) begin
    for (int i = 0; i < 16; i++)
      img[(pix_tile / (W / TILE)) * TILE + i / 4][(pix_tile % (W / TILE)) * TILE + i % 4] = pix_rgb[i];
    tiles_seen++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int fr = 0; fr < 6; fr++) begin
      gauss_t gl[$];
      real refimg[][][3];
      int ng, bad;
      real err;
      gl.delete();
      ng = (fr == 5) ? NG : (fr == 3) ? 24 : $urandom_range(4, 24);
      for (int i = 0; i < ng; i++) begin
        gmem[i] = rand_gauss(1.0, 30.0, 0.5);
        if (fr == 3) begin   // opaque pile in the middle: early termination
          gmem[i].op = 8'd255;
          gmem[i].x = gmem[i].x >>> 3; gmem[i].y = gmem[i].y >>> 3;
        end
        gl.push_back(gmem[i]);
      end
      n_gauss <= (AW+1)'(ng);
      tiles_seen = 0;
      @(posedge clk); start <= 1; @(posedge clk); start <= 0;
      @(posedge done);
      @(posedge clk);
      check(tiles_seen == (W / TILE) * (H / TILE), $sformatf("frame %0d tiles %0d", fr, tiles_seen));
      if (fr == 5) break;
      render(gl, F, W / 2, H / 2, W, H, refimg);
      bad = 0; err = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < 3; c++) begin
            real hv, d;
            hv = (c == 0) ? img[y][x].r : (c == 1) ? img[y][x].g : img[y][x].b;
            d = hv - refimg[y][x][c];
            if (d < 0) d = -d;
            err += d;
            if (d > 12.0) begin
              bad++;
              $display("frame %0d pixel %0d,%0d ch %0d: %f vs %f", fr, x, y, c, hv, refimg[y][x][c]);
            end
          end
      check(bad == 0, $sformatf("frame %0d: %0d channels off by more than 12", fr, bad));
      check(err / (W * H * 3) < 1.0, $sformatf("frame %0d mean error %f", fr, err / (W * H * 3)));
      $display("frame %0d: %0d Gaussians, keys %0d, mean error %f", fr, ng, cnt_keys, err / (W * H * 3));
    end
    check(cnt_sort_overflow > 0, "sort overflow exercised");
    check(cnt_alpha_rejected > 0, "alpha-check rejection exercised");
    check(cnt_early_term > 0, "early termination exercised");
    $display("keys %0d overflow %0d alpha_rejected %0d early_term %0d tiles %0d",
             cnt_keys, cnt_sort_overflow, cnt_alpha_rejected, cnt_early_term, cnt_tiles);
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
