// wl_latch: latched local wordline drivers of one PIMBALL tile.
//
// A logic gate in the array needs several wordlines raised at once (all the
// gate's input rows and its output row). Following the Pinatubo-style scheme
// the paper adopts, row addresses arrive one per cycle and each is latched
// until a clear: `set_i` with `addr_i` adds one row to the latched set,
// `clr_i` drops them all (clear wins over a set in the same cycle). `wl_o`
// is the latched set, one bit per row, registered, so a row set in cycle t
// is visible from cycle t+1. Reset clears every latch.
module wl_latch #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            set_i,
  input  logic [AW-1:0]   addr_i,
  input  logic            clr_i,
  output logic [ROWS-1:0] wl_o,
  output logic [$clog2(ROWS+1)-1:0] count_o   // number of latched rows
);
  logic [$clog2(ROWS+1)-1:0] count_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_o    <= '0;
      count_q <= '0;
    end else if (clr_i) begin
      wl_o    <= '0;
      count_q <= '0;
    end else if (set_i && 32'(addr_i) < ROWS && !wl_o[addr_i]) begin
      wl_o[addr_i] <= 1'b1;
      count_q      <= count_q + 1'b1;
    end
  end

  assign count_o = count_q;

endmodule
