// tb_duplication_unit -- self-checking test of the Gaussian-to-tile key
// generator.
//
// Random projected Gaussians (centres partly off-screen, random radius, some
// culled) are offered with random in_valid, and keys are taken with random
// key_ready. A model lists, in row-major order, every tile that the 3-sigma
// square overlaps after clipping. The key stream must match it exactly, and
// keys_out must count the keys. Off-screen and culled Gaussians must occur.
module tb_duplication_unit;
  import sltarch_pkg::*;
  localparam int W = 64, H = 64, TX = W / TILE;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, key_valid, key_ready = 0;
  proj_t g;
  logic [GID_W-1:0] gid;
  key_t key;
  logic [31:0] keys_out;
  int checks = 0, failures = 0, offscreen = 0, expected_n = 0;
  key_t exp_q[$];

  duplication_unit #(.IMG_W(W), .IMG_H(H)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic model(proj_t q, logic [GID_W-1:0] id);
    int u, v, lx, hx, ly, hy, n;
    key_t k;
    n = 0;
    u = $signed(q.u) >>> 4; v = $signed(q.v) >>> 4;
    lx = u - int'(q.radius); hx = u + int'(q.radius);
    ly = v - int'(q.radius); hy = v + int'(q.radius);
    if (q.valid && hx >= 0 && hy >= 0 && lx < W && ly < H) begin
      if (lx < 0) lx = 0;
      if (ly < 0) ly = 0;
      if (hx >= W) hx = W - 1;
      if (hy >= H) hy = H - 1;
      for (int ty = ly / TILE; ty <= hy / TILE; ty++)
        for (int tx = lx / TILE; tx <= hx / TILE; tx++) begin
          k.tile = TILE_W'(ty * TX + tx); k.depth = q.depth; k.gid = id;
          exp_q.push_back(k); n++;
        end
    end
    if (n == 0) offscreen++;
    expected_n += n;
  endtask

  // random consumer
  always_ff @(posedge clk) key_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && key_valid && key_ready) begin
    key_t e;
    if (exp_q.size() == 0) check(0, "unexpected key");
    else begin
      e = exp_q.pop_front();
      check(key == e, $sformatf("key %h expected %h", key, e));
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 2000; n++) begin
      proj_t q;
      q = '0;
      q.valid = ($urandom_range(0, 9) != 0);
      q.u = 16'((int'($urandom_range(0, 120)) - 28) * 16 + int'($urandom_range(0, 15)));
      q.v = 16'((int'($urandom_range(0, 120)) - 28) * 16 + int'($urandom_range(0, 15)));
      q.radius = 16'($urandom_range(0, 14));
      q.depth = 16'($urandom);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      g = q; gid = GID_W'(n); in_valid = 1;
      model(q, GID_W'(n));
      @(negedge clk);
      in_valid = 0;
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
    check(keys_out == 32'(expected_n), $sformatf("keys_out %0d expected %0d", keys_out, expected_n));
    check(offscreen > 100, "off-screen / culled Gaussians exercised");
    $display("keys %0d offscreen %0d", expected_n, offscreen);
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
