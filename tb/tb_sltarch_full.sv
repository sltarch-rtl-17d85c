// tb_sltarch_full -- end-to-end test of the accelerator top at its default
// (paper-sized) parameters: 4 LT units, 128-set 4-way subtree cache,
// 1024-word output banks, 4096-entry global buffer, 64x64 image.
//
// One random SLTree is searched while one frame of random Gaussians is
// rendered (half of the Gaussians are opaque and piled in the middle). The
// NID set must equal the reference cut. The 64x64 image is compared with
// the floating-point frame reference (each channel within 12, mean below
// 1.0) only if no sorter overflowed, because dropped keys change the image
// by design. Output-buffer and global-buffer swaps, alpha rejections and
// early terminations must occur; queue-full, fill-stall and sort-overflow
// counts are reported.
module tb_sltarch_full;
  import sltarch_pkg::*;
  import tb_tree_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 64, H = 64, NG = 4096, GAW = $clog2(NG), F = 16;
  localparam int ROUNDS = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic lod_start = 0, lod_busy, lod_done;
  logic [SID_W-1:0] root_sid = '0;
  view_t view;
  logic st_req_valid, st_req_ready, st_rsp_valid, st_rsp_last;
  logic [SID_W-1:0] st_req_sid;
  node_t st_rsp_node;
  logic nid_valid, nid_ready, nid_last;
  logic [NID_W-1:0] nid;
  logic gb_swap = 0, gb_wr_en = 0;
  logic [GAW-1:0] gb_wr_addr;
  gauss_t gb_wr_data;
  logic sp_start = 0, sp_busy, sp_done;
  logic [GAW:0] sp_n_gauss;
  logic [15:0] focal = 16'(F), ccx = 16'(W / 2), ccy = 16'(H / 2);
  logic pix_valid, pix_ready;
  logic [TILE_W-1:0] pix_tile;
  rgb_t [15:0] pix_rgb;
  logic [31:0] cnt_nodes, cnt_queue_full, cnt_fill_stall, cnt_obuf_swaps, cnt_subtrees;
  logic [31:0] cnt_keys, cnt_sort_overflow, cnt_alpha_rejected, cnt_early_term, cnt_tiles;
  int beats;
  int checks = 0, failures = 0, gb_swaps = 0;

  sltarch dut (.*);

  subtree_mem #(.LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(st_req_valid), .req_ready(st_req_ready), .req_sid(st_req_sid),
    .rsp_valid(st_rsp_valid), .rsp_node(st_rsp_node), .rsp_last(st_rsp_last), .beats
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int got [int];
  int dup_cnt = 0;
  always_ff @(posedge clk) begin
    if (nid_valid && nid_ready) begin
      if (got.exists(int'(nid))) dup_cnt++;
      got[int'(nid)] = 1;
    end
  end
  always_ff @(posedge clk) nid_ready <= ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk) pix_ready <= ($urandom_range(0, 3) != 0);

  rgb_t img[H][W];
  int tiles_seen;
  always @(posedge clk) if (pix_valid && pix_ready) begin
    for (int i = 0; i < 16; i++)
      img[(pix_tile / (W / TILE)) * TILE + i / 4][(pix_tile % (W / TILE)) * TILE + i % 4] = pix_rgb[i];
    tiles_seen++;
  end

  initial begin
    int q0, f0, s0, o0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < ROUNDS; t++) begin
      gauss_t gl[$];
      real refimg[][][3];
      int ng, miss, extra, bad;
      real err;
      bit lod_fin, sp_fin;
      // frame into the global buffer's fill bank, then swap
      gl.delete();
      ng = (t == ROUNDS - 1 && ROUNDS > 1) ? NG : 24;
      for (int i = 0; i < ng; i++) begin
        gauss_t g;
        g = rand_gauss(1.0, 30.0, 0.5);
        if (t == 1 || (ROUNDS == 1 && i % 2 == 0)) begin g.op = 8'd255; g.x = g.x >>> 3; g.y = g.y >>> 3; end
        gl.push_back(g);
        gb_wr_en <= 1; gb_wr_addr <= GAW'(i); gb_wr_data <= g;
        @(posedge clk);
      end
      gb_wr_en <= 0;
      gb_swap <= 1; @(posedge clk); gb_swap <= 0; gb_swaps++;
      // tree and view
      build(7, (t % 2) ? 60 : 30);
      view = rand_view(3 + 3 * t);
      ref_search(view);
      got.delete();
      o0 = int'(cnt_sort_overflow);
      tiles_seen = 0;
      sp_n_gauss <= (GAW+1)'(ng);
      @(posedge clk);
      lod_start <= 1; sp_start <= 1;
      @(posedge clk);
      lod_start <= 0; sp_start <= 0;
      @(posedge clk);
      lod_fin = 0; sp_fin = 0;
      while (!(lod_fin && sp_fin)) begin
        @(posedge clk);
        if (lod_done) lod_fin = 1;
        if (sp_done) sp_fin = 1;
      end
      repeat (2) @(posedge clk);
      miss = 0; extra = 0;
      foreach (expect_nid[k]) if (!got.exists(k)) miss++;
      foreach (got[k]) if (!expect_nid.exists(k)) extra++;
      check(miss == 0 && extra == 0, $sformatf("round %0d cut mismatch: %0d missing, %0d extra", t, miss, extra));
      check(tiles_seen == (W / TILE) * (H / TILE), "tile count");
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
            if (d > 12.0) bad++;
          end
      if (int'(cnt_sort_overflow) == o0) begin
        check(bad == 0, $sformatf("round %0d: %0d channels off by more than 12", t, bad));
        check(err / (W * H * 3) < 1.0, $sformatf("round %0d mean error %f", t, err / (W * H * 3)));
      end
      $display("round %0d: cut %0d nodes visited %0d, %0d Gaussians, mean error %f",
               t, expect_nid.num(), ref_visited, ng, err / (W * H * 3));
    end
    check(dup_cnt == 0, "NID written twice");
    $display("events: queue full %0d, fill stalls %0d, obuf swaps %0d, gb swaps %0d, sort overflow %0d, alpha rejected %0d, early term %0d",
             cnt_queue_full, cnt_fill_stall, cnt_obuf_swaps, gb_swaps, cnt_sort_overflow, cnt_alpha_rejected, cnt_early_term);
    // queue-full, fill-stall and sort-overflow counts are reported only
    check(gb_swaps > 0, "global buffer swap never happened");
    check(cnt_obuf_swaps > 0, "output buffer swap never happened");
    check(cnt_alpha_rejected > 0, "alpha-check rejection never happened");
    check(cnt_early_term > 0, "early termination never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (lod_busy %0d sp_busy %0d)", lod_busy, sp_busy);
    $display("dbg st %0d q_occ %0d ld_valid %0d ld_sid %0d c_busy %0d idle %b valid %b done %b tags %p outv %b outr %b enqv %b enqr %b deqreq %b", dut.u_ltcore.st, dut.u_ltcore.q_occ, dut.u_ltcore.ld_valid, dut.u_ltcore.ld_sid, dut.u_ltcore.c_busy, dut.u_ltcore.lt_idle, dut.u_ltcore.u_cache.valid, dut.u_ltcore.u_cache.done, dut.u_ltcore.u_cache.tag, dut.u_ltcore.out_valid, dut.u_ltcore.out_ready, dut.u_ltcore.enq_valid, dut.u_ltcore.enq_ready, dut.u_ltcore.deq_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
