// subtree_cache -- set-associative cache of whole subtrees for LTcore.
//
// A line holds one SLTree subtree: the tag is its SID and the data are its
// TAU_S node records {NID, AABB, child SID, size} in depth-first order (slots
// past the subtree's node count are unused). A line is found by SID: the set
// is SID mod SETS and the WAYS tags of that set are compared, as in the
// tag/valid comparators of the cache drawing. A node is then read by
// {line, local index}. Only lines whose traversal has not finished take part
// in the lookup, so a line left over from an earlier search never hits.
//
// Filling: the engine takes the oldest SID of the queue's unloaded segment,
// picks a victim line in its set by round robin among lines that are invalid
// or whose traversal has finished (an LT unit released it), streams the
// subtree's records from DRAM into the line one per beat, and then reports
// ld_done so the queue moves the SID to the loaded segment. If every way of
// the set still holds an unfinished subtree, filling stalls (fill_stalls
// counts those cycles) until one is released. Since a finished subtree is
// never needed again in one traversal, the replacement order does not affect
// hit rate; round robin is what the paper uses.
//
// Ports per LT unit: combinational tag lookup (lk_*), node read with one
// cycle latency that updates only when rd_en is high (rd_*), and line release
// (rel_*). DRAM side: request SID (valid/ready) and a response stream of node
// records with 'last' on the subtree's final record.
//
// Follows the paper: 4 ways, 4 x 128 lines, SID tag, per-line node records,
// stall when no line is finished, round robin. This design's own choices: the
// set index function, the DRAM beat format and the line valid/done flags.
module subtree_cache
  import sltarch_pkg::*;
#(
  parameter int unsigned WAYS = 4,
  parameter int unsigned SETS = 128,
  parameter int unsigned NP   = 4,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SLOT_W = SET_W + WAY_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // lookup
  input  logic [NP-1:0][SID_W-1:0]    lk_sid,
  output logic [NP-1:0]               lk_hit,
  output logic [NP-1:0][SLOT_W-1:0]   lk_slot,
  output logic [NP-1:0][SIZE_W-1:0]   lk_count,
  // node read
  input  logic [NP-1:0]               rd_en,
  input  logic [NP-1:0][SLOT_W-1:0]   rd_slot,
  input  logic [NP-1:0][SIZE_W-1:0]   rd_idx,
  output node_t [NP-1:0]              rd_node,
  // release
  input  logic [NP-1:0]               rel_valid,
  input  logic [NP-1:0][SLOT_W-1:0]   rel_slot,
  // queue load side
  input  logic                        ld_valid,
  input  logic [SID_W-1:0]            ld_sid,
  output logic                        ld_done,
  // DRAM
  output logic                        mem_req_valid,
  input  logic                        mem_req_ready,
  output logic [SID_W-1:0]            mem_req_sid,
  input  logic                        mem_rsp_valid,
  input  node_t                       mem_rsp_node,
  input  logic                        mem_rsp_last,
  // status
  output logic                        busy,
  output logic [31:0]                 fill_stalls,
  output logic [31:0]                 lines_filled
);

  localparam int unsigned LINES = SETS * WAYS;
  localparam int unsigned IDX_W = $clog2(TAU_S);

  node_t             data  [LINES * TAU_S];
  logic [SID_W-1:0]  tag   [LINES];
  logic [SIZE_W-1:0] count [LINES];
  logic [LINES-1:0]  valid, done;
  logic [WAY_W-1:0]  rr    [SETS];

  // ---------------- lookup ----------------
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      automatic logic [SET_W-1:0] s = SET_W'(lk_sid[p] % SID_W'(SETS));
      lk_hit[p]   = 1'b0;
      lk_slot[p]  = '0;
      lk_count[p] = '0;
      for (int w = WAYS - 1; w >= 0; w--) begin
        automatic logic [SLOT_W-1:0] l = {s, WAY_W'(w)};
        if (valid[l] && !done[l] && tag[l] == lk_sid[p]) begin
          lk_hit[p]   = 1'b1;
          lk_slot[p]  = l;
          lk_count[p] = count[l];
        end
      end
    end
  end

  // ---------------- node read ----------------
  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (rd_en[p]) rd_node[p] <= data[{rd_slot[p], rd_idx[p][IDX_W-1:0]}];
  end

  // ---------------- fill engine ----------------
  typedef enum logic [1:0] {F_IDLE, F_REQ, F_RECV} fstate_e;
  fstate_e fst;
  logic [SLOT_W-1:0] fslot;
  logic [SID_W-1:0]  fsid;
  logic [SIZE_W-1:0] fcnt;

  logic [SET_W-1:0] vset;
  logic             vfound;
  logic [WAY_W-1:0] vway;
  always_comb begin
    vset   = SET_W'(ld_sid % SID_W'(SETS));
    vfound = 1'b0;
    vway   = '0;
    for (int k = WAYS - 1; k >= 0; k--) begin
      automatic logic [WAY_W-1:0] w = WAY_W'((int'(rr[vset]) + k) % WAYS);
      automatic logic [SLOT_W-1:0] l = {vset, w};
      if (!valid[l] || done[l]) begin
        vfound = 1'b1;
        vway   = w;
      end
    end
  end

  logic fill_last;
  assign fill_last     = (fst == F_RECV) && mem_rsp_valid && (mem_rsp_last || fcnt == SIZE_W'(TAU_S - 1));
  assign ld_done       = fill_last;
  assign mem_req_valid = (fst == F_REQ);
  assign mem_req_sid   = fsid;
  assign busy          = (fst != F_IDLE);

  always_ff @(posedge clk) begin
    if (fst == F_RECV && mem_rsp_valid)
      data[{fslot, fcnt[IDX_W-1:0]}] <= mem_rsp_node;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE;
      fslot <= '0; fsid <= '0; fcnt <= '0;
      valid <= '0; done <= '0;
      fill_stalls <= '0; lines_filled <= '0;
      for (int s = 0; s < SETS; s++) rr[s] <= '0;
      for (int l = 0; l < LINES; l++) begin tag[l] <= '0; count[l] <= '0; end
    end else begin
      for (int p = 0; p < NP; p++)
        if (rel_valid[p]) done[rel_slot[p]] <= 1'b1;
      case (fst)
        F_IDLE: if (ld_valid) begin
          if (vfound) begin
            fslot <= {vset, vway};
            fsid  <= ld_sid;
            fcnt  <= '0;
            valid[{vset, vway}] <= 1'b0;
            rr[vset] <= WAY_W'((int'(vway) + 1) % WAYS);
            fst <= F_REQ;
          end else begin
            fill_stalls <= fill_stalls + 1;
          end
        end
        F_REQ: if (mem_req_ready) fst <= F_RECV;
        F_RECV: if (mem_rsp_valid) begin
          fcnt <= fcnt + 1'b1;
          if (fill_last) begin
            tag[fslot]   <= fsid;
            count[fslot] <= fcnt + 1'b1;
            valid[fslot] <= 1'b1;
            done[fslot]  <= 1'b0;
            lines_filled <= lines_filled + 1;
            fst <= F_IDLE;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // A line may only be released while it holds a subtree.
  for (genvar p = 0; p < NP; p++) begin : g_chk
    a_rel: assert property (@(posedge clk) disable iff (!rst_n) rel_valid[p] |-> valid[rel_slot[p]]);
  end

endmodule
