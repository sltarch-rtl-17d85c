// sp_unit -- splatting unit for one 2x2 pixel group.
//
// One alpha-check unit tests each incoming Gaussian at the centre of the
// group; only Gaussians that pass are sent, in the same cycle, to the four
// blend units, one per pixel. All four pixels thus integrate the same list of
// Gaussians: there is no divergence inside the group, which is the point of
// the design. Pixel i of the group is (2*gx + i%2, 2*gy + i/2); the group
// centre is (2*gx + 1, 2*gy + 1) in pixel units with pixel centres at +0.5.
//
// Timing: Gaussians arrive one per cycle with g_valid; blend results update
// one cycle later. 'clear' starts a new group. Counters: Gaussians tested and
// Gaussians rejected by the group test.
//
// Follows the paper: one alpha-check unit and four blend units per SP unit.
// This design's own choices: the group addressing and the counters.
module sp_unit
  import sltarch_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [11:0]        gx, gy,       // group coordinates
  input  logic               g_valid,
  input  proj_t              g,
  output rgb_t [3:0]         rgb,
  output logic [3:0]         term,
  output logic [31:0]        tested,
  output logic [31:0]        rejected
);
  logic signed [15:0] cx, cy;
  logic signed [31:0] power;
  logic               pass;

  assign cx = 16'(({4'd0, gx} << 1) + 16'd1) <<< 4;
  assign cy = 16'(({4'd0, gy} << 1) + 16'd1) <<< 4;

  alpha_check u_check (
    .u(g.u), .v(g.v), .ca(g.ca), .cb(g.cb), .cc(g.cc), .tau(g.tau),
    .cx, .cy, .power, .pass
  );

  for (genvar i = 0; i < 4; i++) begin : g_blend
    logic signed [15:0] px, py;
    logic [16:0] trans;
    logic [31:0] blended;
    assign px = 16'(({4'd0, gx} << 1) + 16'(i % 2)) * 16'sd16 + 16'sd8;
    assign py = 16'(({4'd0, gy} << 1) + 16'(i / 2)) * 16'sd16 + 16'sd8;
    blend_unit u_blend (
      .clk, .rst_n, .clear,
      .g_valid(g_valid && pass), .g,
      .px, .py, .rgb(rgb[i]), .trans, .term(term[i]), .blended
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tested <= '0; rejected <= '0;
    end else if (g_valid) begin
      tested <= tested + 1;
      if (!pass) rejected <= rejected + 1;
    end
  end
endmodule
