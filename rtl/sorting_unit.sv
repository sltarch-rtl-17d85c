// sorting_unit -- insertion sorter for (tile, depth) keys.
//
// The unit holds up to N keys in a register array kept in ascending order of
// {tile, depth} (tile first, then near to far). In the LOAD phase every
// accepted key is inserted in one cycle: entries greater than it shift one
// place up and the key drops into the gap (equal keys keep arrival order).
// 'seal' ends the LOAD phase; in the DRAIN phase the smallest key is at
// out_key and each out_ready pops it. 'clear' empties the unit for the next
// frame. A key offered to a full unit is dropped and counted in 'overflow'.
//
// The paper names this unit (taken from GSCore) and no more; the insertion
// structure and the capacity are this design's own choices.
module sorting_unit
  import sltarch_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              seal,
  input  logic              in_valid,
  input  key_t              in_key,
  output logic              in_ready,
  output logic              out_valid,
  input  logic              out_ready,
  output key_t              out_key,
  output logic [$clog2(N+1)-1:0] count,
  output logic [31:0]       overflow
);
  key_t  e [N];
  logic  draining;

  function automatic logic gt(input key_t a, input key_t b);
    return {a.tile, a.depth} > {b.tile, b.depth};
  endfunction

  assign in_ready  = !draining && (count < ($clog2(N+1))'(N));
  assign out_valid = draining && (count != 0);
  assign out_key   = e[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining <= 1'b0; count <= '0; overflow <= '0;
      for (int i = 0; i < N; i++) e[i] <= '0;
    end else if (clear) begin
      draining <= 1'b0; count <= '0;
    end else if (!draining) begin
      if (seal) draining <= 1'b1;
      else if (in_valid) begin
        if (in_ready) begin
          for (int i = 0; i < N; i++) begin
            if (i < int'(count) && gt(e[i], in_key)) begin
              if (i + 1 < N) e[i+1] <= e[i];
              if (i == 0 || !gt(e[i-1], in_key)) e[i] <= in_key;
            end else if (i == int'(count) && (i == 0 || !gt(e[i-1], in_key))) begin
              e[i] <= in_key;
            end
          end
          count <= count + 1'b1;
        end else overflow <= overflow + 1;
      end
    end else if (out_valid && out_ready) begin
      for (int i = 0; i + 1 < N; i++) e[i] <= e[i+1];
      count <= count - 1'b1;
    end
  end
endmodule
