// pim_array: logic-level model of one transposed (1T1M) PIMBALL cell array.
//
// Storage is ROWS x COLS bits; a row is one memory word. Memory access works
// like an ordinary STT-MRAM: one wordline, one row read or written (write
// honours a per-column mask). Logic works inside columns: every latched
// wordline connects its cell to the column's logic line, so in each selected
// column the latched cells form one gate. Which latched cells are inputs and
// which is the output is set by the bitline voltages: inputs must all sit on
// rows of one parity (all on BLO = even rows, or all on BLE = odd rows; as in
// the 1T1M cell drawing, the cell of wordline 0 hangs on BLO, that of wordline
// 1 on BLE) and
// the single output on a row of the other parity, as the paper requires for
// the 1T1M array. `in_odd_i` says which bitline carries the inputs.
//
// The gate is modelled the way the paper explains it physically: the output
// cell is not overwritten, it either switches or keeps its value, depending
// on the inputs. A 0 (parallel, low-resistance) input lets more current
// through the output cell. NAND, NOR and NOT expect the output preset to 0 and
// switch it to 1 (NAND when any input is 0, NOR when all inputs are 0, NOT
// when its input is 0). COPY expects a preset of 1 and switches it to 0 when
// its input is 0. The preset polarity of NAND/NOR follows the paper; that of
// NOT and COPY is this design's reading of the same current argument. A gate
// fired without the preset therefore gives a wrong result, as the real
// array would. The analog side (voltage signatures, Table of margins) is not
// modelled.
//
// Timing: a write or a gate updates the array at the clock edge; a read
// returns the row on rdata_o one cycle after re_i. The cell array has no
// reset (the cells are non-volatile). A gate whose latched rows break the
// parity rule (not exactly one output row, no input, or a NOT/COPY with more
// than one input) changes nothing and raises err_o for one cycle.
//
// Lint note: rst_n is both the asynchronous reset of err_o and the
// disable condition of the assertion below. A linter may report the net as
// used both ways; that is intended, the assertion only observes.
module pim_array
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = pim_pkg::ROWS_DEF,
  parameter int unsigned COLS = pim_pkg::COLS_DEF,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // memory port
  input  logic            we_i,
  input  logic [AW-1:0]   waddr_i,
  input  logic [COLS-1:0] wdata_i,
  input  logic [COLS-1:0] wmask_i,
  input  logic            re_i,
  input  logic [AW-1:0]   raddr_i,
  output logic [COLS-1:0] rdata_o,
  // logic port
  input  logic            fire_i,
  input  gate_e           gate_i,
  input  logic            in_odd_i,
  input  logic [ROWS-1:0] wl_i,
  input  logic [COLS-1:0] bl_i,
  output logic            err_o
);
  logic [COLS-1:0] mem [ROWS];

  logic [COLS-1:0] and_all, or_any, sw, next_row;
  logic [AW-1:0]   out_row;
  int unsigned     n_in, n_out;
  logic            ok, target;

  // Classify the latched rows and combine the input cells column by column.
  always_comb begin
    and_all = '1;
    or_any  = '0;
    n_in    = 0;
    n_out   = 0;
    out_row = '0;
    if (fire_i) begin
      for (int unsigned r = 0; r < ROWS; r++) begin
        if (wl_i[r]) begin
          if (r[0] == in_odd_i) begin
            and_all &= mem[r];
            or_any  |= mem[r];
            n_in++;
          end else begin
            out_row = AW'(r);
            n_out++;
          end
        end
      end
    end
    ok = fire_i && (n_out == 1) && (n_in >= 1) &&
         !(((gate_i == GATE_NOT) || (gate_i == GATE_COPY)) && (n_in != 1));
    unique case (gate_i)
      GATE_NAND: sw = ~and_all;
      GATE_NOR:  sw = ~or_any;
      default:   sw = ~and_all;   // NOT and COPY: the single input inverted
    endcase
    sw     = sw & bl_i;
    target = (gate_i != GATE_COPY);
    next_row = target ? (mem[out_row] | sw) : (mem[out_row] & ~sw);
  end

  always_ff @(posedge clk) begin
    if (we_i)
      mem[waddr_i] <= (mem[waddr_i] & ~wmask_i) | (wdata_i & wmask_i);
    if (ok)
      mem[out_row] <= next_row;
    if (re_i)
      rdata_o <= mem[raddr_i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_o <= 1'b0;
    else        err_o <= fire_i && !ok;
  end

  // A write and a gate never share a cycle: the peripheral circuitry drives
  // the bitlines for one or the other.
  a_no_write_during_gate: assert property (@(posedge clk) disable iff (!rst_n)
    !(we_i && fire_i));

endmodule
