// duplication_unit -- turns one projected Gaussian into one sort key per tile
// its 3-sigma circle may touch.
//
// The basic 3-sigma Gaussian-tile test: the Gaussian covers the square
// [u - r, u + r] x [v - r, v + r] (r = 3-sigma radius in pixels); every tile
// of TILE x TILE pixels that this square overlaps, clipped to the image,
// gets a key {tile index, depth, Gaussian index}. Keys leave one per cycle,
// tiles in row-major order; the unit accepts the next Gaussian when the last
// key of the current one has been taken. An invalid (culled) or fully
// off-screen Gaussian produces no key.
//
// Interface: in_valid/in_ready for Gaussians, key_valid/key_ready for keys.
//
// The paper only names this unit (taken from GSCore, with the basic 3-sigma
// test); the tile size, the key layout and the one-key-per-cycle FSM are this
// design's own.
module duplication_unit
  import sltarch_pkg::*;
#(
  parameter int unsigned IMG_W = 64,
  parameter int unsigned IMG_H = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  proj_t             g,
  input  logic [GID_W-1:0]  gid,
  output logic              key_valid,
  input  logic              key_ready,
  output key_t              key,
  output logic [31:0]       keys_out
);
  localparam int TX = IMG_W / TILE;
  localparam int TY = IMG_H / TILE;

  logic               busy;
  logic [7:0]         tx0, tx1, ty1, cx, cy;
  logic [DEPTH_W-1:0] dep;
  logic [GID_W-1:0]   id;

  // tile range of the incoming Gaussian
  logic signed [19:0] upx, vpx, lx, hx, ly, hy;
  logic               on_screen;
  logic [7:0]         ntx0, ntx1, nty0, nty1;
  always_comb begin
    upx = 20'($signed(g.u)) >>> 4;
    vpx = 20'($signed(g.v)) >>> 4;
    lx = upx - 20'(g.radius); hx = upx + 20'(g.radius);
    ly = vpx - 20'(g.radius); hy = vpx + 20'(g.radius);
    on_screen = g.valid && hx >= 0 && hy >= 0 && lx < $signed(20'(IMG_W)) && ly < $signed(20'(IMG_H));
    ntx0 = (lx < 0) ? 8'd0 : 8'(lx / TILE);
    nty0 = (ly < 0) ? 8'd0 : 8'(ly / TILE);
    ntx1 = (hx >= $signed(20'(IMG_W))) ? 8'(TX - 1) : 8'(hx / TILE);
    nty1 = (hy >= $signed(20'(IMG_H))) ? 8'(TY - 1) : 8'(hy / TILE);
  end

  assign in_ready  = !busy;
  assign key_valid = busy;
  assign key.tile  = TILE_W'(32'(cy) * TX + 32'(cx));
  assign key.depth = dep;
  assign key.gid   = id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; tx0 <= '0; tx1 <= '0; ty1 <= '0; cx <= '0; cy <= '0;
      dep <= '0; id <= '0; keys_out <= '0;
    end else if (!busy) begin
      if (in_valid && on_screen) begin
        busy <= 1'b1;
        tx0 <= ntx0; tx1 <= ntx1; ty1 <= nty1;
        cx <= ntx0; cy <= nty0;
        dep <= g.depth; id <= gid;
      end
    end else if (key_ready) begin
      keys_out <= keys_out + 1;
      if (cx == tx1) begin
        cx <= tx0;
        if (cy == ty1) busy <= 1'b0;
        else cy <= cy + 1'b1;
      end else cx <= cx + 1'b1;
    end
  end
endmodule
