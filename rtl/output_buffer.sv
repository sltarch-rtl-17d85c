// output_buffer -- double-buffered store for the selected node IDs of LTcore.
//
// Two banks of BANK_WORDS NIDs. LT units write into the FILL bank (up to NW
// writes per cycle, accepted in index order while room remains); the other
// bank is the WRITE-BACK bank and drains one NID per cycle to memory through
// a valid/ready stream. When the fill bank is full, or on flush with a partly
// filled bank, the two banks swap roles as soon as the write-back bank has
// drained, so traversal continues while results go out. wb_last marks the
// final word of a drained bank; 'swaps' counts role swaps.
//
// Follows the paper: double buffering with a write-back and a filling buffer
// that swap when the filling buffer is full; 8 KB in total (2 x 1024 x 32 bit).
// This design's own choices: the multi-write port, the flush input and the
// stream interface.
module output_buffer
  import sltarch_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned NW         = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NW-1:0]              wr_valid,
  input  logic [NW-1:0][NID_W-1:0]   wr_nid,
  output logic [NW-1:0]              wr_ready,
  input  logic                       flush,       // swap a partly filled bank
  output logic                       wb_valid,
  input  logic                       wb_ready,
  output logic [NID_W-1:0]           wb_nid,
  output logic                       wb_last,
  output logic                       empty,       // both banks hold nothing
  output logic [31:0]                swaps
);

  localparam int unsigned AW = $clog2(BANK_WORDS + 1);

  logic [NID_W-1:0] mem [2][BANK_WORDS];
  logic             fb;             // index of the fill bank
  logic [AW-1:0]    fill_cnt;       // words in the fill bank
  logic [AW-1:0]    wb_cnt, wb_ptr; // words in / read pointer of write-back bank

  logic [AW-1:0] n_wr;
  always_comb begin
    n_wr = '0;
    for (int i = 0; i < NW; i++) begin
      wr_ready[i] = (fill_cnt + n_wr) < AW'(BANK_WORDS);
      if (wr_valid[i] && wr_ready[i]) n_wr = n_wr + 1'b1;
    end
  end

  logic wb_empty, do_swap;
  assign wb_empty = (wb_ptr == wb_cnt);
  assign do_swap  = wb_empty && ((fill_cnt == AW'(BANK_WORDS)) || (flush && fill_cnt != '0));
  assign wb_valid = !wb_empty;
  assign wb_nid   = mem[!fb][wb_ptr[AW-2:0]];
  assign wb_last  = (wb_ptr + 1'b1 == wb_cnt);
  assign empty    = wb_empty && (fill_cnt == '0);

  always_ff @(posedge clk) begin
    automatic logic [AW-1:0] k = '0;
    for (int i = 0; i < NW; i++)
      if (wr_valid[i] && wr_ready[i]) begin
        mem[fb][fill_cnt[AW-2:0] + k[AW-2:0]] <= wr_nid[i];
        k = k + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb <= 1'b0; fill_cnt <= '0; wb_cnt <= '0; wb_ptr <= '0; swaps <= '0;
    end else begin
      if (do_swap) begin
        // writes of this cycle still land in the old fill bank (see above),
        // so they are counted into the bank that turns write-back
        fb       <= !fb;
        wb_cnt   <= fill_cnt + n_wr;
        wb_ptr   <= '0;
        fill_cnt <= '0;
        swaps    <= swaps + 1;
      end else begin
        fill_cnt <= fill_cnt + n_wr;
        if (wb_valid && wb_ready) wb_ptr <= wb_ptr + 1'b1;
      end
    end
  end

  a_cnt: assert property (@(posedge clk) disable iff (!rst_n) fill_cnt <= AW'(BANK_WORDS));

endmodule
