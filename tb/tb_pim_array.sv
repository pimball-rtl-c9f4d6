// tb_pim_array: checks the cell array on its own.
//  * memory: masked row writes and one-cycle reads against a reference array;
//  * logic: random NOT/NAND/NOR/COPY gates with 1..4 inputs on rows of one
//    parity and the output on the other parity, on a random column selection,
//    output preset first; expected values from the gates' truth tables,
//    unselected columns must keep their value;
//  * switching semantics: a NAND whose output was not preset to 0 keeps a 1
//    where the inputs are all 1 (it can only switch 0 -> 1);
//  * parity rule: a gate with two output-side rows, or with inputs on both
//    parities only, raises err and changes nothing.
module tb_pim_array import pim_pkg::*; ;
  localparam int ROWS = 16, COLS = 32;
  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0, fire = 0, in_odd = 0, err;
  logic [3:0] waddr = '0, raddr = '0;
  logic [COLS-1:0] wdata = '0, wmask = '0, rdata, bl = '0;
  logic [ROWS-1:0] wl = '0;
  gate_e gate = GATE_NOT;
  logic [COLS-1:0] refm [ROWS];
  int checks = 0, failures = 0;

  pim_array #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .wmask_i(wmask),
    .re_i(re), .raddr_i(raddr), .rdata_o(rdata), .fire_i(fire), .gate_i(gate),
    .in_odd_i(in_odd), .wl_i(wl), .bl_i(bl), .err_o(err));
  always #5 clk = ~clk;

  task automatic write_row(int r, logic [COLS-1:0] d, logic [COLS-1:0] m);
    we = 1; waddr = 4'(r); wdata = d; wmask = m;
    @(negedge clk); we = 0;
    refm[r] = (refm[r] & ~m) | (d & m);
  endtask

  task automatic check_row(int r, string what);
    re = 1; raddr = 4'(r);
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== refm[r]) begin
      failures++;
      $display("FAIL %s row %0d: got %h exp %h", what, r, rdata, refm[r]);
    end
  endtask

  task automatic fire_gate(gate_e g, logic odd, logic [ROWS-1:0] rows, logic [COLS-1:0] cols);
    gate = g; in_odd = odd; wl = rows; bl = cols; fire = 1;
    @(negedge clk); fire = 0; wl = '0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) write_row(r, COLS'($urandom), '1);
    for (int r = 0; r < ROWS; r++) check_row(r, "init");
    // masked writes
    for (int k = 0; k < 30; k++) begin
      automatic int r = $urandom_range(0, ROWS-1);
      write_row(r, COLS'($urandom), COLS'($urandom));
      check_row(r, "masked write");
    end
    // random gates
    for (int k = 0; k < 300; k++) begin
      gate_e g;
      logic odd;
      int nin, outr;
      logic [ROWS-1:0] rows;
      logic [COLS-1:0] cols, exp_v, andv, orv;
      g    = gate_e'($urandom_range(0, 3));
      odd  = 1'($urandom);
      nin  = (g == GATE_NOT || g == GATE_COPY) ? 1 : $urandom_range(1, 4);
      rows = '0;
      while ($countones(rows) < nin) rows[2 * $urandom_range(0, ROWS/2-1) + int'(odd)] = 1'b1;
      outr = 2 * $urandom_range(0, ROWS/2-1) + int'(!odd);
      cols = COLS'($urandom);
      write_row(outr, {COLS{gate_preset(g)}}, cols);   // preset
      andv = '1; orv = '0;
      for (int r = 0; r < ROWS; r++) if (rows[r]) begin andv &= refm[r]; orv |= refm[r]; end
      case (g)
        GATE_NAND: exp_v = ~andv;
        GATE_NOR:  exp_v = ~orv;
        GATE_NOT:  exp_v = ~andv;
        default:   exp_v = andv;
      endcase
      rows[outr] = 1'b1;
      fire_gate(g, odd, rows, cols);
      checks++;
      if (err) begin failures++; $display("FAIL unexpected err"); end
      refm[outr] = (refm[outr] & ~cols) | (exp_v & cols);
      check_row(outr, $sformatf("gate %s nin=%0d", g.name(), nin));
    end
    // no preset: output left at 1 cannot switch down for NAND(1,1)
    write_row(2, '1, '1); write_row(4, 32'h0000_FFFF, '1); write_row(5, '1, '1);
    fire_gate(GATE_NAND, 1'b0, ROWS'((1 << 2) | (1 << 4) | (1 << 5)), '1);
    check_row(5, "nand without preset");   // ref row 5 unchanged: all ones
    // parity violations
    write_row(1, '0, '1); write_row(3, '0, '1);
    fire_gate(GATE_NAND, 1'b0, ROWS'((1 << 2) | (1 << 1) | (1 << 3)), '1);
    checks++; if (!err) begin failures++; $display("FAIL two outputs not flagged"); end
    check_row(1, "violation keeps row 1"); check_row(3, "violation keeps row 3");
    fire_gate(GATE_NOT, 1'b1, ROWS'((1 << 1) | (1 << 3) | (1 << 2)), '1);
    checks++; if (!err) begin failures++; $display("FAIL NOT with two inputs not flagged"); end
    check_row(2, "violation keeps row 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
