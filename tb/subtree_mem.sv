// subtree_mem -- behavioural model of the off-chip memory that holds the
// SLTree (testbench only). A subtree request is accepted when idle; after LAT
// cycles the subtree's node records stream out one per cycle, 'last' on the
// final one. Subtrees are read from tb_tree_pkg.
module subtree_mem
  import sltarch_pkg::*;
#(
  parameter int LAT = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [SID_W-1:0] req_sid,
  output logic             rsp_valid,
  output node_t            rsp_node,
  output logic             rsp_last,
  output int               beats
);
  int sid, wait_c, k;
  logic busy;
  assign req_ready = !busy;
  always_comb begin
    rsp_valid = busy && wait_c == 0;
    rsp_node  = tb_tree_pkg::st_nodes[sid][k];
    rsp_last  = (k == tb_tree_pkg::st_count[sid] - 1);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; sid <= 0; wait_c <= 0; k <= 0; beats <= 0;
    end else if (!busy) begin
      if (req_valid) begin busy <= 1; sid <= int'(req_sid); wait_c <= LAT; k <= 0; end
    end else if (wait_c != 0) wait_c <= wait_c - 1;
    else begin
      beats <= beats + 1;
      if (rsp_last) busy <= 0;
      else k <= k + 1;
    end
  end
endmodule
