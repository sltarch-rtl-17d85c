// subtree_queue -- the subtree-ID FIFO of LTcore, split in two segments.
//
// Entries between head and ldp form the LOADED segment: their subtrees are
// already in the subtree cache, and only these are handed to LT units.
// Entries between ldp and tail form the UNLOADED segment: the cache fill
// engine reads the oldest of them (ld_sid), fetches that subtree from DRAM and
// pulses ld_done, which moves the SID to the loaded segment. Because an LT
// unit only ever receives a loaded SID it never waits on a cache miss.
//
// Writes: up to NENQ enqueues per cycle (one per LT unit, plus an external
// port used to seed the root subtree). Requesters are accepted in index order
// while free slots remain; enq_ready[i] tells each one whether it was taken.
// Reads: one dequeue per cycle, granted round-robin among the LT units that
// request. The round-robin pointer and the multi-port write are this design's
// choices; the two segments and the 48-byte size (DEPTH = 16 SIDs of 24 bits)
// follow the paper.
module subtree_queue
  import sltarch_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NENQ  = 5,
  parameter int unsigned NDEQ  = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // enqueue
  input  logic [NENQ-1:0]             enq_valid,
  input  logic [NENQ-1:0][SID_W-1:0]  enq_sid,
  output logic [NENQ-1:0]             enq_ready,
  // dequeue (loaded segment only)
  input  logic [NDEQ-1:0]             deq_req,
  output logic [NDEQ-1:0]             deq_gnt,
  output logic [SID_W-1:0]            deq_sid,
  // load side (unloaded segment)
  output logic                        ld_valid,
  output logic [SID_W-1:0]            ld_sid,
  input  logic                        ld_done,
  // status
  output logic                        empty,
  output logic [$clog2(DEPTH+1)-1:0]  occupancy,
  output logic [31:0]                 full_events
);

  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [SID_W-1:0] q [DEPTH];
  logic [PW-1:0] head, ldp, tail;
  logic [CW-1:0] n_all, n_loaded;
  logic [$clog2(NDEQ)-1:0] rr;

  function automatic logic [PW-1:0] wrap(input logic [PW:0] p);
    return (p >= (PW+1)'(DEPTH)) ? PW'(p - (PW+1)'(DEPTH)) : PW'(p);
  endfunction

  // enqueue acceptance in index order
  logic [CW-1:0] n_enq;
  logic [CW-1:0] free_slots;
  always_comb begin
    free_slots = CW'(DEPTH) - n_all;
    n_enq = '0;
    for (int i = 0; i < NENQ; i++) begin
      enq_ready[i] = (n_enq < free_slots);
      if (enq_valid[i] && enq_ready[i]) n_enq = n_enq + 1'b1;
    end
  end

  // round-robin dequeue grant
  logic do_deq;
  logic [$clog2(NDEQ)-1:0] gsel;
  always_comb begin
    deq_gnt = '0;
    do_deq  = 1'b0;
    gsel    = rr;
    for (int k = NDEQ - 1; k >= 0; k--) begin
      if (deq_req[(int'(rr) + k) % NDEQ] && n_loaded != 0) begin
        gsel   = $clog2(NDEQ)'((int'(rr) + k) % NDEQ);
        do_deq = 1'b1;
      end
    end
    if (do_deq) deq_gnt[gsel] = 1'b1;
  end
  assign deq_sid  = q[head];
  assign ld_valid = (n_all != n_loaded);
  assign ld_sid   = q[ldp];
  assign empty    = (n_all == 0);
  assign occupancy = n_all;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; ldp <= '0; tail <= '0;
      n_all <= '0; n_loaded <= '0; rr <= '0;
      full_events <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      automatic logic [CW-1:0] k = '0;
      for (int i = 0; i < NENQ; i++) begin
        if (enq_valid[i] && enq_ready[i]) begin
          q[wrap({1'b0, tail} + (PW+1)'(k))] <= enq_sid[i];
          k = k + 1'b1;
        end
        if (enq_valid[i] && !enq_ready[i]) full_events <= full_events + 1;
      end
      tail <= wrap({1'b0, tail} + (PW+1)'(n_enq));
      if (do_deq) begin
        head <= wrap({1'b0, head} + 1'b1);
        rr   <= gsel + 1'b1;
      end
      if (ld_done && ld_valid) ldp <= wrap({1'b0, ldp} + 1'b1);
      n_all    <= n_all + n_enq - CW'(do_deq);
      n_loaded <= n_loaded + CW'(ld_done && ld_valid) - CW'(do_deq);
    end
  end

  a_gnt_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(deq_gnt));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) n_all <= CW'(DEPTH));

endmodule
