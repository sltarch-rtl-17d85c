// ltcore -- the LoD-search core: NLT LT units sharing one subtree queue, one
// subtree cache and one double-buffered output buffer.
//
// Operation: 'start' pushes the root SID into the subtree queue. The cache
// fill engine streams each queued subtree from DRAM into a cache line and
// moves its SID to the queue's loaded segment; idle LT-unit contexts take
// loaded SIDs (dynamic scheduling: whichever unit is free takes the next
// subtree), walk them, write selected NIDs into the output buffer and push
// the SIDs of child subtrees that need visiting back into the queue. The
// search is over when the queue is empty, no fill is in progress and every LT
// unit is idle; the output buffer is then flushed, and 'done' rises once the
// last NID has left through the write-back stream.
//
// Interface: view parameters are held stable for a whole search. DRAM side:
// subtree fetch (request SID, response node records) and the NID write-back
// stream. Counters expose the events the core is built around.
//
// Follows the paper: 2 x 2 LT units, queue with loaded/unloaded segments,
// subtree cache, double-buffered output buffer. This design's own choices:
// the start/done protocol and the termination test.
module ltcore
  import sltarch_pkg::*;
#(
  parameter int unsigned NLT        = 4,
  parameter int unsigned RING       = 4,
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned SETS       = 128,
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SID_W-1:0]  root_sid,
  input  view_t             view,
  output logic              busy,
  output logic              done,
  // DRAM: subtree fetch
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [SID_W-1:0]  mem_req_sid,
  input  logic              mem_rsp_valid,
  input  node_t             mem_rsp_node,
  input  logic              mem_rsp_last,
  // DRAM: selected NIDs (the rendering queue)
  output logic              nid_valid,
  input  logic              nid_ready,
  output logic [NID_W-1:0]  nid,
  output logic              nid_last,
  // counters
  output logic [31:0]       cnt_nodes,
  output logic [31:0]       cnt_queue_full,
  output logic [31:0]       cnt_fill_stall,
  output logic [31:0]       cnt_obuf_swaps,
  output logic [31:0]       cnt_subtrees
);

  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned SLOT_W = SET_W + WAY_W;

  logic [NLT-1:0]              deq_req, deq_gnt;
  logic [SID_W-1:0]            deq_sid;
  logic [NLT-1:0][SID_W-1:0]   lk_sid;
  logic [NLT-1:0]              lk_hit;
  logic [NLT-1:0][SLOT_W-1:0]  lk_slot;
  logic [NLT-1:0][SIZE_W-1:0]  lk_count;
  logic [NLT-1:0]              rd_en;
  logic [NLT-1:0][SLOT_W-1:0]  rd_slot;
  logic [NLT-1:0][SIZE_W-1:0]  rd_idx;
  node_t [NLT-1:0]             rd_node;
  logic [NLT-1:0]              rel_valid;
  logic [NLT-1:0][SLOT_W-1:0]  rel_slot;
  logic [NLT-1:0]              out_valid, out_ready;
  logic [NLT-1:0][NID_W-1:0]   out_nid;
  logic [NLT:0]                enq_valid, enq_ready;
  logic [NLT:0][SID_W-1:0]     enq_sid;
  logic [NLT-1:0]              lt_idle;
  logic [NLT-1:0][31:0]        lt_nodes;
  logic                        ld_valid, ld_done, q_empty, c_busy, ob_empty;
  logic [SID_W-1:0]            ld_sid;
  logic [$clog2(QDEPTH+1)-1:0] q_occ;

  // ---------------- control ----------------
  typedef enum logic [1:0] {S_IDLE, S_SEED, S_RUN, S_DRAIN} state_e;
  state_e st;
  logic   flush;

  assign enq_valid[NLT] = (st == S_SEED);
  assign enq_sid[NLT]   = root_sid;
  assign flush          = (st == S_DRAIN);
  assign busy           = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0;
    end else begin
      case (st)
        S_IDLE:  if (start) begin st <= S_SEED; done <= 1'b0; end
        S_SEED:  if (enq_ready[NLT]) st <= S_RUN;
        S_RUN:   if (q_empty && !c_busy && (&lt_idle)) st <= S_DRAIN;
        S_DRAIN: if (ob_empty) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- blocks ----------------
  subtree_queue #(.DEPTH(QDEPTH), .NENQ(NLT + 1), .NDEQ(NLT)) u_queue (
    .clk, .rst_n,
    .enq_valid, .enq_sid, .enq_ready,
    .deq_req, .deq_gnt, .deq_sid,
    .ld_valid, .ld_sid, .ld_done,
    .empty(q_empty), .occupancy(q_occ), .full_events(cnt_queue_full)
  );

  subtree_cache #(.WAYS(WAYS), .SETS(SETS), .NP(NLT)) u_cache (
    .clk, .rst_n,
    .lk_sid, .lk_hit, .lk_slot, .lk_count,
    .rd_en, .rd_slot, .rd_idx, .rd_node,
    .rel_valid, .rel_slot,
    .ld_valid, .ld_sid, .ld_done,
    .mem_req_valid, .mem_req_ready, .mem_req_sid,
    .mem_rsp_valid, .mem_rsp_node, .mem_rsp_last,
    .busy(c_busy), .fill_stalls(cnt_fill_stall), .lines_filled(cnt_subtrees)
  );

  output_buffer #(.BANK_WORDS(BANK_WORDS), .NW(NLT)) u_obuf (
    .clk, .rst_n,
    .wr_valid(out_valid), .wr_nid(out_nid), .wr_ready(out_ready),
    .flush,
    .wb_valid(nid_valid), .wb_ready(nid_ready), .wb_nid(nid), .wb_last(nid_last),
    .empty(ob_empty), .swaps(cnt_obuf_swaps)
  );

  for (genvar i = 0; i < NLT; i++) begin : g_lt
    lt_unit #(.RING(RING), .SLOT_W(SLOT_W)) u_lt (
      .clk, .rst_n, .view,
      .deq_req(deq_req[i]), .deq_gnt(deq_gnt[i]), .deq_sid,
      .lk_sid(lk_sid[i]), .lk_hit(lk_hit[i]), .lk_slot(lk_slot[i]), .lk_count(lk_count[i]),
      .rd_en(rd_en[i]), .rd_slot(rd_slot[i]), .rd_idx(rd_idx[i]), .rd_node(rd_node[i]),
      .rel_valid(rel_valid[i]), .rel_slot(rel_slot[i]),
      .out_valid(out_valid[i]), .out_ready(out_ready[i]), .out_nid(out_nid[i]),
      .enq_valid(enq_valid[i]), .enq_ready(enq_ready[i]), .enq_sid(enq_sid[i]),
      .idle(lt_idle[i]), .nodes_visited(lt_nodes[i])
    );
  end

  always_comb begin
    cnt_nodes = '0;
    for (int i = 0; i < NLT; i++) cnt_nodes = cnt_nodes + lt_nodes[i];
  end

endmodule
