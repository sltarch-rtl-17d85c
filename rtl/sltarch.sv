// sltarch -- top level: the LoD-search core (LTcore), the double-buffered
// global buffer and the splatting core (SPcore).
//
// One frame: the controller (outside this module) starts LTcore with the
// view; LTcore streams subtrees from memory, searches the LoD tree and writes
// the IDs of the selected Gaussians (the "cut") to memory through nid_*.
// The selected Gaussians' records are then written into the global buffer's
// load bank (gb_wr_*), the banks are swapped (gb_swap), and SPcore is started
// with their count; it renders the frame and emits 4x4-pixel tiles on pix_*.
// Since the global buffer is double-buffered, the next batch can be loaded
// while SPcore works on the current one.
//
// The block sequencing (which the paper assigns to an on-chip MCU it does not
// describe) and the memory traffic are left to the surrounding system: every
// control and memory signal is a port. Counters from both cores come out for
// observation.
module sltarch
  import sltarch_pkg::*;
#(
  parameter int unsigned NLT        = 4,
  parameter int unsigned RING       = 4,
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned SETS       = 128,
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned GB_DEPTH   = 4096,
  parameter int unsigned N_PROJ     = 4,
  parameter int unsigned N_SORT     = 4,
  parameter int unsigned SORT_N     = 64,
  parameter int unsigned IMG_W      = 64,
  parameter int unsigned IMG_H      = 64,
  localparam int unsigned GAW       = $clog2(GB_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // LoD search control
  input  logic              lod_start,
  input  logic [SID_W-1:0]  root_sid,
  input  view_t             view,
  output logic              lod_busy,
  output logic              lod_done,
  // subtree fetch
  output logic              st_req_valid,
  input  logic              st_req_ready,
  output logic [SID_W-1:0]  st_req_sid,
  input  logic              st_rsp_valid,
  input  node_t             st_rsp_node,
  input  logic              st_rsp_last,
  // selected NIDs
  output logic              nid_valid,
  input  logic              nid_ready,
  output logic [NID_W-1:0]  nid,
  output logic              nid_last,
  // global buffer load side
  input  logic              gb_swap,
  input  logic              gb_wr_en,
  input  logic [GAW-1:0]    gb_wr_addr,
  input  gauss_t            gb_wr_data,
  // splatting control
  input  logic              sp_start,
  input  logic [GAW:0]      sp_n_gauss,
  input  logic [15:0]       focal, ccx, ccy,
  output logic              sp_busy,
  output logic              sp_done,
  // pixels
  output logic              pix_valid,
  input  logic              pix_ready,
  output logic [TILE_W-1:0] pix_tile,
  output rgb_t [15:0]       pix_rgb,
  // counters
  output logic [31:0]       cnt_nodes,
  output logic [31:0]       cnt_queue_full,
  output logic [31:0]       cnt_fill_stall,
  output logic [31:0]       cnt_obuf_swaps,
  output logic [31:0]       cnt_subtrees,
  output logic [31:0]       cnt_keys,
  output logic [31:0]       cnt_sort_overflow,
  output logic [31:0]       cnt_alpha_rejected,
  output logic [31:0]       cnt_early_term,
  output logic [31:0]       cnt_tiles
);

  logic                       cbank;
  logic [N_PROJ-1:0]          gb_rd_en;
  logic [N_PROJ-1:0][GAW-1:0] gb_rd_addr;
  gauss_t [N_PROJ-1:0]        gb_rd_data;

  ltcore #(
    .NLT(NLT), .RING(RING), .QDEPTH(QDEPTH), .WAYS(WAYS), .SETS(SETS), .BANK_WORDS(BANK_WORDS)
  ) u_ltcore (
    .clk, .rst_n, .start(lod_start), .root_sid, .view, .busy(lod_busy), .done(lod_done),
    .mem_req_valid(st_req_valid), .mem_req_ready(st_req_ready), .mem_req_sid(st_req_sid),
    .mem_rsp_valid(st_rsp_valid), .mem_rsp_node(st_rsp_node), .mem_rsp_last(st_rsp_last),
    .nid_valid, .nid_ready, .nid, .nid_last,
    .cnt_nodes, .cnt_queue_full, .cnt_fill_stall, .cnt_obuf_swaps, .cnt_subtrees
  );

  global_buffer #(.DEPTH(GB_DEPTH), .NR(N_PROJ)) u_gbuf (
    .clk, .rst_n, .swap(gb_swap), .cbank,
    .wr_en(gb_wr_en), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data),
    .rd_en(gb_rd_en), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data)
  );

  spcore #(
    .NG_MAX(GB_DEPTH), .N_PROJ(N_PROJ), .N_SORT(N_SORT), .SORT_N(SORT_N), .IMG_W(IMG_W), .IMG_H(IMG_H)
  ) u_spcore (
    .clk, .rst_n, .start(sp_start), .n_gauss(sp_n_gauss), .focal, .ccx, .ccy,
    .busy(sp_busy), .done(sp_done),
    .gb_rd_en, .gb_rd_addr, .gb_rd_data,
    .pix_valid, .pix_ready, .pix_tile, .pix_rgb,
    .cnt_keys, .cnt_sort_overflow, .cnt_alpha_rejected, .cnt_early_term, .cnt_tiles
  );

endmodule
