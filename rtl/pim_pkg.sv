// pim_pkg: types and constants shared by the PIMBALL tile, its sequencer,
// the inter-tile transfer engine and the top.
//
// A tile is driven by one command per clock cycle (tile_ctl_t). The command set
// mirrors what the array's peripheral circuitry does: write or read one row,
// latch one more wordline, clear all latched wordlines, select a range of
// columns for logic, clear the column selection, preset one row on the selected
// columns, and fire a logic gate. The gate set follows the paper's universal set
// (NOT, NAND, NOR, plus COPY, which the evaluation uses); the command encoding
// and widths are this design's own choice.
package pim_pkg;

  // Default tile geometry: 1024 x 1024 cells (128 KB), the smaller of the two
  // tile sizes the paper evaluates.
  localparam int unsigned ROWS_DEF = 1024;
  localparam int unsigned COLS_DEF = 1024;

  typedef enum logic [1:0] {
    GATE_NOT  = 2'd0,
    GATE_NAND = 2'd1,
    GATE_NOR  = 2'd2,
    GATE_COPY = 2'd3
  } gate_e;

  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_WRITE    = 3'd1,  // write row `row` with `data` where `mask` is set
    CMD_READ     = 3'd2,  // read row `row`; data returns one cycle later
    CMD_WL_SET   = 3'd3,  // latch wordline `row` (added to the latched set)
    CMD_WL_CLEAR = 3'd4,  // release every latched wordline
    CMD_BL_RANGE = 3'd5,  // select columns col_lo..col_hi (added to the selection)
    CMD_BL_CLEAR = 3'd6,  // deselect every column
    CMD_PRESET   = 3'd7   // write `pval` into row `row` on the selected columns
  } cmd_op_e;

  // Value the output cell must hold before each gate fires. NAND, NOR and NOT
  // switch an output preset to 0 up to 1; COPY switches an output preset to 1
  // down to 0 (current driven the other way).
  function automatic logic gate_preset(gate_e g);
    return (g == GATE_COPY);
  endfunction

  // Gate fire is a separate flag so that every cmd_op_e value stays a plain
  // memory or peripheral operation.
  typedef struct packed {
    logic    fire;      // 1: fire gate `gate` on latched rows and selected columns
    gate_e   gate;
    logic    in_odd;    // 1: inputs on odd rows (BLE), output on an even row (BLO)
    cmd_op_e op;        // used when fire == 0
    logic [15:0] row;
    logic [15:0] col_lo;
    logic [15:0] col_hi;
    logic        pval;
  } tile_ctl_t;

endpackage
