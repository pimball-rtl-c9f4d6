// pim_tile: one PIMBALL array (tile) with its peripheral control.
//
// The paper builds the accelerator from independent tiles, each a single
// 1T1M array that can act as plain STT-MRAM and compute at the same time.
// This module wraps the cell array (pim_array) with the latched wordline
// drivers (wl_latch) and the column selection (bl_select) and decodes one
// command per cycle from a tile_ctl_t:
//   fire=1          fire gate `gate` on the latched rows and selected columns
//   CMD_WRITE       write `wdata_i` into `row` where `wmask_i` is set
//   CMD_READ        read `row`; `rdata_o` is valid with `rvalid_o` next cycle
//   CMD_WL_SET      latch wordline `row`;  CMD_WL_CLEAR releases all
//   CMD_BL_RANGE    select columns col_lo..col_hi;  CMD_BL_CLEAR deselects all
//   CMD_PRESET      write `pval` into `row` on the selected columns only
// The command is taken whenever `valid_i` is high; there is no back-pressure.
// Every command takes one cycle, a choice of this design: the paper gives
// latencies in nanoseconds per array access and per gate, not in cycles.
// `err_o` pulses when a gate breaks the 1T1M parity rule (see pim_array).
// `gates_o` counts gates fired since reset.
//
// The wordline latch's count of raised rows is left unconnected here: the
// tile needs no such status, and the count is there for tests of the latch.
module pim_tile
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = pim_pkg::ROWS_DEF,
  parameter int unsigned COLS = pim_pkg::COLS_DEF,
  parameter int unsigned AW   = $clog2(ROWS),
  parameter int unsigned CW   = $clog2(COLS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  tile_ctl_t       ctl_i,
  input  logic [COLS-1:0] wdata_i,
  input  logic [COLS-1:0] wmask_i,
  output logic [COLS-1:0] rdata_o,
  output logic            rvalid_o,
  output logic            err_o,
  output logic [31:0]     gates_o
);
  logic [ROWS-1:0] wl;
  logic [COLS-1:0] bl;
  logic            is_cmd, fire;
  logic            we;
  logic [COLS-1:0] wdata, wmask;

  assign fire   = valid_i &&  ctl_i.fire;
  assign is_cmd = valid_i && !ctl_i.fire;

  always_comb begin
    we    = is_cmd && (ctl_i.op == CMD_WRITE || ctl_i.op == CMD_PRESET);
    wdata = (ctl_i.op == CMD_PRESET) ? {COLS{ctl_i.pval}} : wdata_i;
    wmask = (ctl_i.op == CMD_PRESET) ? bl : wmask_i;
  end

  wl_latch #(.ROWS(ROWS), .AW(AW)) u_wl (
    .clk, .rst_n,
    .set_i  (is_cmd && ctl_i.op == CMD_WL_SET),
    .addr_i (ctl_i.row[AW-1:0]),
    .clr_i  (is_cmd && ctl_i.op == CMD_WL_CLEAR),
    .wl_o   (wl),
    .count_o()
  );

  bl_select #(.COLS(COLS), .AW(CW)) u_bl (
    .clk, .rst_n,
    .range_i(is_cmd && ctl_i.op == CMD_BL_RANGE),
    .lo_i   (ctl_i.col_lo[CW-1:0]),
    .hi_i   (ctl_i.col_hi[CW-1:0]),
    .clr_i  (is_cmd && ctl_i.op == CMD_BL_CLEAR),
    .bl_o   (bl)
  );

  pim_array #(.ROWS(ROWS), .COLS(COLS), .AW(AW)) u_array (
    .clk, .rst_n,
    .we_i    (we),
    .waddr_i (ctl_i.row[AW-1:0]),
    .wdata_i (wdata),
    .wmask_i (wmask),
    .re_i    (is_cmd && ctl_i.op == CMD_READ),
    .raddr_i (ctl_i.row[AW-1:0]),
    .rdata_o (rdata_o),
    .fire_i  (fire),
    .gate_i  (ctl_i.gate),
    .in_odd_i(ctl_i.in_odd),
    .wl_i    (wl),
    .bl_i    (bl),
    .err_o   (err_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid_o <= 1'b0;
      gates_o  <= '0;
    end else begin
      rvalid_o <= is_cmd && ctl_i.op == CMD_READ;
      if (fire) gates_o <= gates_o + 1;
    end
  end

endmodule
