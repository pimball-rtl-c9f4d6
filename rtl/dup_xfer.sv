// dup_xfer: communication and duplication between tiles.
//
// Consecutive network layers live in different tiles. After a layer, its
// output neurons sit in one row of the source tile (one bit per column). The
// next layer needs every input neuron in every one of its columns, so each
// output bit must become a whole row of the destination tile. In DUP mode this
// engine reads the source row once and then writes, for i = 0..n-1, the row
// dst_row + 2*i of the destination tile with bit (src_col + i) of the source
// row copied into every column (stride 2 keeps all inputs on even rows, where
// bnn_sequencer expects them). In COPY mode it writes the source row unchanged
// into dst_row. As the paper assumes, the read and the writes are strictly
// sequential: the read command, two cycles until its data is back (command
// register and array read), then one write per cycle and a done cycle, so
// DUP of n bits keeps the engine busy n + 4 cycles and COPY 5.
// The engine issues tile commands through `valid_o`/`ctl_o`/`tile_o`; the
// top routes them to tile `tile_o`. Read data returns on `rdata_i`/`rvalid_i`.
module dup_xfer
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = pim_pkg::ROWS_DEF,
  parameter int unsigned COLS = pim_pkg::COLS_DEF,
  parameter int unsigned NT   = 2,
  parameter int unsigned AW   = $clog2(ROWS),
  parameter int unsigned CW   = $clog2(COLS),
  parameter int unsigned TIW  = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  logic             dup_i,        // 1: duplicate, 0: plain row copy
  input  logic [TIW-1:0]   src_tile_i,
  input  logic [AW-1:0]    src_row_i,
  input  logic [CW-1:0]    src_col_i,    // first source column to duplicate
  input  logic [TIW-1:0]   dst_tile_i,
  input  logic [AW-1:0]    dst_row_i,
  input  logic [CW:0]      n_i,          // bits to duplicate, 1..COLS
  output logic             busy_o,
  output logic             done_o,
  output logic             valid_o,
  output logic [TIW-1:0]   tile_o,
  output tile_ctl_t        ctl_o,
  output logic [COLS-1:0]  wdata_o,
  output logic [COLS-1:0]  wmask_o,
  input  logic [COLS-1:0]  rdata_i,
  input  logic             rvalid_i
);
  typedef enum logic [1:0] {X_IDLE, X_READ, X_WAIT, X_WRITE} xstate_e;
  xstate_e st;

  logic            dup;
  logic [TIW-1:0]  s_tile, d_tile;
  logic [AW-1:0]   s_row, d_row;
  logic [CW-1:0]   s_col;
  logic [CW:0]     n, i;
  logic [COLS-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; busy_o <= 1'b0; done_o <= 1'b0; valid_o <= 1'b0;
      tile_o <= '0; ctl_o <= '0; wdata_o <= '0; wmask_o <= '0;
      dup <= 1'b0; s_tile <= '0; d_tile <= '0; s_row <= '0; d_row <= '0;
      s_col <= '0; n <= '0; i <= '0; buf_q <= '0;
    end else begin
      valid_o <= 1'b0;
      done_o  <= 1'b0;
      ctl_o   <= '0;
      unique case (st)
        X_IDLE: if (start_i) begin
          dup <= dup_i; s_tile <= src_tile_i; s_row <= src_row_i; s_col <= src_col_i;
          d_tile <= dst_tile_i; d_row <= dst_row_i; n <= dup_i ? n_i : (CW+1)'(1);
          i <= '0; busy_o <= 1'b1; st <= X_READ;
        end
        X_READ: begin
          valid_o   <= 1'b1;
          tile_o    <= s_tile;
          ctl_o.op  <= CMD_READ;
          ctl_o.row <= 16'(s_row);
          st <= X_WAIT;
        end
        X_WAIT: if (rvalid_i) begin
          buf_q <= rdata_i;
          st    <= X_WRITE;
        end
        X_WRITE: begin
          if (i == n) begin
            busy_o <= 1'b0; done_o <= 1'b1; st <= X_IDLE;
          end else begin
            valid_o   <= 1'b1;
            tile_o    <= d_tile;
            ctl_o.op  <= CMD_WRITE;
            ctl_o.row <= 16'(32'(d_row) + 2 * 32'(i));
            wdata_o   <= dup ? {COLS{buf_q[32'(s_col) + 32'(i)]}} : buf_q;
            wmask_o   <= '1;
            i <= i + 1'b1;
          end
        end
        default: st <= X_IDLE;
      endcase
    end
  end

endmodule
