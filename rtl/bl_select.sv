// bl_select: column selection for in-array logic in one PIMBALL tile.
//
// In the transposed 1T1M array a gate is formed inside each column, and the
// gate voltages are applied only to the columns that should compute. This
// block holds which columns are driven. `range_i` adds columns lo_i..hi_i
// (inclusive) to the selection in one cycle, `clr_i` deselects all (clear wins).
// `bl_o` is registered: a change made in cycle t is seen from cycle t+1.
// The paper says columns must be addressed but not how; a range command is
// this design's choice, since a layer normally uses a contiguous block of
// columns, one output neuron per column.
module bl_select #(
  parameter int unsigned COLS = 1024,
  parameter int unsigned AW   = $clog2(COLS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            range_i,
  input  logic [AW-1:0]   lo_i,
  input  logic [AW-1:0]   hi_i,
  input  logic            clr_i,
  output logic [COLS-1:0] bl_o
);
  logic [COLS-1:0] span;

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      span[c] = (c >= 32'(lo_i)) && (c <= 32'(hi_i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        bl_o <= '0;
    else if (clr_i)    bl_o <= '0;
    else if (range_i)  bl_o <= bl_o | span;
  end

endmodule
