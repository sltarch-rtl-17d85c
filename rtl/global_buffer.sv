// global_buffer -- double-buffered on-chip store of Gaussian records.
//
// Two banks of DEPTH Gaussians. The memory side fills the LOAD bank through
// the write port while SPcore reads the other bank, the COMPUTE bank, through
// NR read ports; 'swap' exchanges the two roles, so loading the next batch
// hides behind rendering the current one. Reads return data one cycle after
// rd_en (registered, as an SRAM would).
//
// Follows the paper: a double-buffered global buffer that feeds SPcore,
// 256 KB in total (2 x 4096 slots of 32 bytes; a record uses 22 of them).
// Own choices: the number of read ports (one per projection unit) and the
// swap command.
module global_buffer
  import sltarch_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NR    = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  swap,
  output logic                  cbank,     // bank SPcore reads
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  gauss_t                wr_data,
  input  logic [NR-1:0]         rd_en,
  input  logic [NR-1:0][AW-1:0] rd_addr,
  output gauss_t [NR-1:0]       rd_data
);
  gauss_t mem [2][DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cbank <= 1'b0;
    else if (swap) cbank <= !cbank;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[!cbank][wr_addr] <= wr_data;
    for (int i = 0; i < NR; i++)
      if (rd_en[i]) rd_data[i] <= mem[cbank][rd_addr[i]];
  end
endmodule
