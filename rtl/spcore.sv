// spcore -- the splatting core: projection, duplication, sorting and a 2x2
// array of SP units, rendering one frame from the Gaussians in the global
// buffer's compute bank.
//
// A frame runs in three phases:
//   PROJECT  N_PROJ Gaussians per cycle are read from the global buffer and
//            projected; the results go to an on-chip projected-Gaussian
//            buffer indexed by Gaussian number.
//   DUPLICATE the duplication unit reads the projected buffer and emits one
//            {tile, depth, index} key per overlapped tile. Key k goes to
//            sorting unit (tile mod N_SORT), which keeps its keys ordered by
//            tile and depth.
//   SPLAT    tiles are rendered in index order. For tile t the keys of t are
//            at the head of sorting unit t mod N_SORT; they are popped one per
//            cycle, their projected Gaussians fetched and broadcast to the
//            four SP units (each owns one 2x2 group of the 4x4-pixel tile).
//            When the list is exhausted the 16 pixels leave as one beat.
// 'done' pulses after the last tile.
//
// Interface: start with n_gauss and camera intrinsics (held for the frame);
// global-buffer read ports (data one cycle after the address); pixel output
// stream, one tile of 16 RGB pixels per beat, pixel (x, y) of the tile at
// index 4*y + x. Counters report keys, sort overflows, Gaussians rejected by
// the group alpha test and pixels that terminated early.
//
// Follows the paper: the unit list (projection, duplication, sorting, SP
// units), four projection and four sorting units, 2x2 SP units with one
// alpha-check and four blend units each. The phase sequencing, tile size,
// projected buffer and key distribution over the sorters are this design's
// own, as the paper defers these parts to GSCore.
module spcore
  import sltarch_pkg::*;
#(
  parameter int unsigned NG_MAX = 4096,
  parameter int unsigned N_PROJ = 4,
  parameter int unsigned N_SORT = 4,
  parameter int unsigned SORT_N = 64,
  parameter int unsigned IMG_W  = 64,
  parameter int unsigned IMG_H  = 64,
  localparam int unsigned AW    = $clog2(NG_MAX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [AW:0]               n_gauss,
  input  logic [15:0]               focal, ccx, ccy,
  output logic                      busy,
  output logic                      done,
  // global buffer read ports
  output logic [N_PROJ-1:0]         gb_rd_en,
  output logic [N_PROJ-1:0][AW-1:0] gb_rd_addr,
  input  gauss_t [N_PROJ-1:0]       gb_rd_data,
  // pixels
  output logic                      pix_valid,
  input  logic                      pix_ready,
  output logic [TILE_W-1:0]         pix_tile,
  output rgb_t [15:0]               pix_rgb,
  // counters
  output logic [31:0]               cnt_keys,
  output logic [31:0]               cnt_sort_overflow,
  output logic [31:0]               cnt_alpha_rejected,
  output logic [31:0]               cnt_early_term,
  output logic [31:0]               cnt_tiles
);
  localparam int unsigned TX = IMG_W / TILE;
  localparam int unsigned TY = IMG_H / TILE;
  localparam int unsigned NT = TX * TY;
  localparam int unsigned SW = (N_SORT > 1) ? $clog2(N_SORT) : 1;

  typedef enum logic [3:0] {S_IDLE, S_PROJ, S_PWAIT, S_DUP, S_SEAL, S_TCLR, S_TRUN, S_TOUT} state_e;
  state_e st;

  logic [AW:0]   ptr;
  logic [1:0]    wait_cnt;
  logic [TILE_W:0] tile;

  // ---------------- projection ----------------
  proj_t pbuf [NG_MAX];
  logic [N_PROJ-1:0]          v1;
  logic [N_PROJ-1:0][AW-1:0]  gid1, gid2;
  logic [N_PROJ-1:0]          pv;
  proj_t [N_PROJ-1:0]         pq;

  always_comb begin
    for (int l = 0; l < N_PROJ; l++) begin
      gb_rd_en[l]   = (st == S_PROJ) && ((ptr + (AW+1)'(l)) < n_gauss);
      gb_rd_addr[l] = AW'(ptr + (AW+1)'(l));
    end
  end

  for (genvar l = 0; l < N_PROJ; l++) begin : g_proj
    projection_unit u_proj (
      .clk, .rst_n, .in_valid(v1[l]), .gin(gb_rd_data[l]),
      .focal, .ccx, .ccy, .out_valid(pv[l]), .pout(pq[l])
    );
  end

  // ---------------- duplication ----------------
  logic [AW:0]       dptr;
  logic              dv;
  proj_t             dg;
  logic [AW-1:0]     dgid;
  logic              dup_ready, key_valid;
  key_t              key;

  duplication_unit #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_dup (
    .clk, .rst_n, .in_valid(dv), .in_ready(dup_ready), .g(dg), .gid(GID_W'(dgid)),
    .key_valid, .key_ready(1'b1), .key, .keys_out(cnt_keys)
  );

  // ---------------- sorting ----------------
  logic [N_SORT-1:0]        s_in_valid, s_in_ready, s_out_valid, s_out_ready;
  key_t [N_SORT-1:0]        s_out_key;
  logic [N_SORT-1:0][31:0]  s_ovf;
  logic                     s_clear, s_seal;
  logic [SW-1:0]            tsel;

  assign s_clear = (st == S_IDLE) && start;
  assign s_seal  = (st == S_SEAL);
  assign tsel    = SW'(tile % TILE_W'(N_SORT));

  for (genvar s = 0; s < N_SORT; s++) begin : g_sort
    logic [$clog2(SORT_N+1)-1:0] cnt;
    assign s_in_valid[s] = key_valid && (32'(key.tile) % N_SORT == s);
    sorting_unit #(.N(SORT_N)) u_sort (
      .clk, .rst_n, .clear(s_clear), .seal(s_seal),
      .in_valid(s_in_valid[s]), .in_key(key), .in_ready(s_in_ready[s]),
      .out_valid(s_out_valid[s]), .out_ready(s_out_ready[s]), .out_key(s_out_key[s]),
      .count(cnt), .overflow(s_ovf[s])
    );
  end

  // ---------------- splatting ----------------
  logic       head_hit, pop, rv;
  proj_t      rg;
  logic [11:0] tx, ty;
  rgb_t [3:0][3:0] sp_rgb;
  logic [3:0][3:0] sp_term;
  logic [3:0][31:0] sp_tested, sp_rej;
  logic       sp_clear;

  assign head_hit = s_out_valid[tsel] && (s_out_key[tsel].tile == TILE_W'(tile));
  assign pop      = (st == S_TRUN) && head_hit;
  always_comb begin
    s_out_ready = '0;
    s_out_ready[tsel] = pop;
  end
  assign tx = 12'(32'(tile) % TX);
  assign ty = 12'(32'(tile) / TX);
  assign sp_clear = (st == S_TCLR);

  for (genvar j = 0; j < 4; j++) begin : g_sp
    sp_unit u_sp (
      .clk, .rst_n, .clear(sp_clear),
      .gx(12'((tx << 1) + 12'(j % 2))), .gy(12'((ty << 1) + 12'(j / 2))),
      .g_valid(rv), .g(rg),
      .rgb(sp_rgb[j]), .term(sp_term[j]), .tested(sp_tested[j]), .rejected(sp_rej[j])
    );
  end

  always_comb begin
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 4; x++)
        pix_rgb[4*y + x] = sp_rgb[(y/2)*2 + x/2][(y%2)*2 + x%2];
    cnt_alpha_rejected = '0;
    for (int j = 0; j < 4; j++) cnt_alpha_rejected = cnt_alpha_rejected + sp_rej[j];
    cnt_sort_overflow = '0;
    for (int s = 0; s < N_SORT; s++) cnt_sort_overflow = cnt_sort_overflow + s_ovf[s];
  end
  assign pix_valid = (st == S_TOUT);
  assign pix_tile  = TILE_W'(tile);
  assign busy      = (st != S_IDLE);

  // ---------------- memories ----------------
  always_ff @(posedge clk) begin
    for (int l = 0; l < N_PROJ; l++)
      if (pv[l]) pbuf[gid2[l]] <= pq[l];
    if (st == S_DUP && (!dv || dup_ready) && dptr < n_gauss) dg <= pbuf[dptr[AW-1:0]];
    if (pop) rg <= pbuf[s_out_key[tsel].gid[AW-1:0]];
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ptr <= '0; wait_cnt <= '0; tile <= '0; done <= 1'b0;
      v1 <= '0; gid1 <= '0; gid2 <= '0;
      dptr <= '0; dv <= 1'b0; dgid <= '0; rv <= 1'b0;
      cnt_early_term <= '0; cnt_tiles <= '0;
    end else begin
      done <= 1'b0;
      // projection pipeline bookkeeping
      v1   <= gb_rd_en;
      gid1 <= gb_rd_addr;
      gid2 <= gid1;
      rv   <= pop;
      case (st)
        S_IDLE: if (start) begin st <= S_PROJ; ptr <= '0; end
        S_PROJ: begin
          ptr <= ptr + (AW+1)'(N_PROJ);
          if (ptr + (AW+1)'(N_PROJ) >= n_gauss) begin st <= S_PWAIT; wait_cnt <= '0; end
        end
        S_PWAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 2'd2) begin st <= S_DUP; dptr <= '0; dv <= 1'b0; end
        end
        S_DUP: begin
          if (!dv || dup_ready) begin
            if (dptr < n_gauss) begin
              dv <= 1'b1; dgid <= dptr[AW-1:0]; dptr <= dptr + 1'b1;
            end else begin
              dv <= 1'b0;
              if (!dv && dup_ready && !key_valid) st <= S_SEAL;
            end
          end
        end
        S_SEAL: begin st <= S_TCLR; tile <= '0; end
        S_TCLR: st <= S_TRUN;
        S_TRUN: if (!head_hit && !rv) st <= S_TOUT;
        S_TOUT: if (pix_ready) begin
          cnt_tiles <= cnt_tiles + 1;
          cnt_early_term <= cnt_early_term + 32'($countones(sp_term));
          if (tile == (TILE_W+1)'(NT - 1)) begin st <= S_IDLE; done <= 1'b1; end
          else begin tile <= tile + 1'b1; st <= S_TCLR; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
