// tb_pim_tile: drives one tile through its command port only.
//  * WRITE then READ: data returns with rvalid exactly one cycle after READ;
//  * PRESET writes only the columns selected by BL_RANGE, and nothing after
//    BL_CLEAR;
//  * a NAND and a NOT built from PRESET, WL_CLEAR, WL_SET and a fire give the
//    truth-table result on the selected columns only;
//  * wordlines stay latched until WL_CLEAR: firing again without a clear
//    adds a second output-side row and must raise err;
//  * the gate counter counts fired gates.
module tb_pim_tile import pim_pkg::*; ;
  localparam int ROWS = 32, COLS = 16;
  logic clk = 0, rst_n = 0, valid = 0, rvalid, err;
  tile_ctl_t ctl = '0;
  logic [COLS-1:0] wdata = '0, wmask = '0, rdata;
  logic [31:0] gates;
  logic [COLS-1:0] refm [ROWS];
  int checks = 0, failures = 0;

  pim_tile #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .valid_i(valid), .ctl_i(ctl), .wdata_i(wdata), .wmask_i(wmask),
    .rdata_o(rdata), .rvalid_o(rvalid), .err_o(err), .gates_o(gates));
  always #5 clk = ~clk;

  task automatic cmd(cmd_op_e op, int row = 0, int lo = 0, int hi = 0, logic pv = 0);
    ctl = '0; ctl.op = op; ctl.row = 16'(row); ctl.col_lo = 16'(lo); ctl.col_hi = 16'(hi);
    ctl.pval = pv; valid = 1;
    @(negedge clk); valid = 0;
  endtask
  task automatic fire(gate_e g, logic odd);
    ctl = '0; ctl.fire = 1; ctl.gate = g; ctl.in_odd = odd; valid = 1;
    @(negedge clk); valid = 0;
  endtask
  task automatic wr(int row, logic [COLS-1:0] d);
    wdata = d; wmask = '1; cmd(CMD_WRITE, row); refm[row] = d;
    checks++;
    if (rvalid) begin failures++; $display("FAIL rvalid after a write"); end
  endtask
  task automatic rd_check(int row, string what);
    ctl = '0; ctl.op = CMD_READ; ctl.row = 16'(row); valid = 1;
    @(posedge clk); #1 valid = 0;
    checks++;
    if (!rvalid || rdata !== refm[row]) begin
      failures++; $display("FAIL %s row %0d: rvalid=%b got %h exp %h", what, row, rvalid, rdata, refm[row]);
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] sel;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) wr(r, COLS'($urandom));
    for (int r = 0; r < ROWS; r++) rd_check(r, "write/read");
    // column selection and preset
    cmd(CMD_BL_RANGE, 0, 3, 9);
    cmd(CMD_BL_RANGE, 0, 12, 12);
    sel = '0; for (int c = 0; c < COLS; c++) if ((c >= 3 && c <= 9) || c == 12) sel[c] = 1;
    cmd(CMD_PRESET, 7, 0, 0, 1'b1); refm[7] |= sel;
    rd_check(7, "preset 1 on selected columns");
    cmd(CMD_PRESET, 7, 0, 0, 1'b0); refm[7] &= ~sel;
    rd_check(7, "preset 0 on selected columns");
    // NAND of rows 2 and 4 (even, BLE) into row 9 (odd)
    for (int k = 0; k < 20; k++) begin
      wr(2, COLS'($urandom)); wr(4, COLS'($urandom));
      cmd(CMD_PRESET, 9, 0, 0, 1'b0); refm[9] &= ~sel;
      cmd(CMD_WL_CLEAR);
      cmd(CMD_WL_SET, 2); cmd(CMD_WL_SET, 4); cmd(CMD_WL_SET, 9);
      fire(GATE_NAND, 1'b0);
      refm[9] = (refm[9] & ~sel) | (~(refm[2] & refm[4]) & sel);
      rd_check(9, "NAND");
      // NOT of row 9 (odd) into row 10 (even)
      cmd(CMD_PRESET, 10, 0, 0, 1'b0); refm[10] &= ~sel;
      cmd(CMD_WL_CLEAR);
      cmd(CMD_WL_SET, 9); cmd(CMD_WL_SET, 10);
      fire(GATE_NOT, 1'b1);
      refm[10] = (refm[10] & ~sel) | (~refm[9] & sel);
      rd_check(10, "NOT");
    end
    checks++;
    if (gates != 40) begin failures++; $display("FAIL gate count %0d", gates); end
    // without WL_CLEAR, row 12 joins rows 9 and 10: two output-side rows
    cmd(CMD_WL_SET, 12);
    ctl = '0; ctl.fire = 1; ctl.gate = GATE_NOT; ctl.in_odd = 1; valid = 1;
    @(posedge clk); #1 valid = 0;
    checks++;
    if (!err) begin failures++; $display("FAIL missing err for stale wordlines"); end
    @(negedge clk);
    rd_check(10, "no change on error"); rd_check(12, "no change on error");
    // after BL_CLEAR a preset touches nothing
    cmd(CMD_BL_CLEAR);
    cmd(CMD_PRESET, 7, 0, 0, 1'b1);
    rd_check(7, "preset with no column selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
